// tb_sne_slice: a full slice (16 clusters x 64 neurons) as a 32x32 output
// map tiled 4x4, each cluster with its own weight-set offset and output
// channel. The testbench streams all 256 3x3 kernels as weight words, then
// time steps of random input events each closed by FIRE, with a RST in the
// middle. The output stream (under random back-pressure) must hold, per time
// step, exactly the reference model's spikes followed by one FIRE marker.
// Also checked: an UPDATE occupies the slice for 66 cycles (1 + 64 + 1),
// the synaptic-operation counter, and that stalls happened.
module tb_sne_slice;
  import sne_pkg::*;
  import sne_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wclr = 0;
  lif_cfg_t lif; cluster_cfg_t cfg [16];
  logic in_valid = 0, in_ready, out_valid, out_ready; stream_t in_data = '0, out_data;
  logic [31:0] sop_cnt, stall_cnt, upd_cnt;
  always #5 clk = ~clk;
  sne_slice dut (.clk_i(clk), .rst_ni(rst_n), .lif_i(lif), .cl_cfg_i(cfg), .wclr_i(wclr),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data),
    .sop_cnt_o(sop_cnt), .stall_cnt_o(stall_cnt), .upd_cnt_o(upd_cnt));

  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  slice_model m;
  logic [31:0] rx [$];
  logic [31:0] exp_by_t [int][$];
  int cyc = 0, last_upd = -1, gaps_ok = 0, gaps_bad = 0;
  always @(posedge clk) begin
    cyc++;
    if (out_valid && out_ready) rx.push_back(stream_to_mem(out_data));
    out_ready <= ($urandom_range(0, 40) == 0);
    if (in_valid && in_ready && in_data.kind == KIND_EVENT && in_data.op == OP_UPDATE) begin
      if (last_upd >= 0) begin if (cyc - last_upd == 66) gaps_ok++; else gaps_bad++; end
      last_upd = cyc;
    end else if (in_valid && in_ready) last_upd = -1;
  end

  task automatic send(stream_t w);
    @(negedge clk); in_valid = 1; in_data = w;
    while (1) begin #1; if (in_ready) break; @(negedge clk); end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  // back-to-back event send: keeps valid high so the gap measures the slice
  task automatic send_burst(stream_t q [$]);
    foreach (q[i]) begin
      if (i == 0) @(negedge clk);
      in_valid = 1; in_data = q[i];
      while (1) begin #1; if (in_ready) break; @(negedge clk); end
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    stream_t q [$];
    logic [31:0] spikes [$];
    m = new(16, 64, 8);
    for (int s = 0; s < 256; s++) for (int k = 0; k < 9; k++) m.w[s][k] = $urandom_range(0, 13) - 6;
    for (int c = 0; c < 16; c++) begin
      cfg[c] = '0;
      cfg[c].base_x = 7'((c % 4) * 8); cfg[c].base_y = 7'((c / 4) * 8);
      cfg[c].wset = 8'(c * 7); cfg[c].out_ch = 8'(c);
      m.base_x[c] = (c % 4) * 8; m.base_y[c] = (c / 4) * 8; m.wset[c] = c * 7; m.out_ch[c] = c;
    end
    lif.vth = 5; lif.leak = 1; m.vth = 5; m.leak = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); wclr = 1; @(negedge clk); wclr = 0;
    for (int wd = 0; wd < 288; wd++) begin
      stream_t w; w.kind = KIND_WEIGHT; w.op = OP_NOP;
      for (int i = 0; i < 8; i++) w.data[i*4 +: 4] = 4'(m.w[(wd*8 + i) / 9][(wd*8 + i) % 9]);
      send(w);
    end
    send(make_event(OP_RST, 0, 0, 0, 0)); m.rst(0);
    for (int t = 1; t <= 8; t++) begin
      if (t == 5) begin send(make_event(OP_RST, 8'(t), 0, 0, 0)); m.rst(t); end
      q.delete();
      for (int e = 0; e < 12; e++) begin
        int x, y, ch;
        x = $urandom_range(0, 31); y = $urandom_range(0, 31); ch = $urandom_range(0, 255);
        q.push_back(make_event(OP_UPDATE, 8'(t), 8'(ch), 7'(x), 7'(y))); m.update(t, ch, x, y);
      end
      send_burst(q);
      spikes.delete(); m.fire(t, spikes); exp_by_t[t] = spikes;
      send(make_event(OP_FIRE, 8'(t), 0, 0, 0));
    end
    repeat (8000) @(posedge clk);
    // compare per time step
    begin
      int i = 0;
      for (int t = 1; t <= 8; t++) begin
        logic [31:0] got [$];
        got.delete();
        while (i < rx.size() && rx[i][31:30] != OP_FIRE) begin got.push_back(rx[i]); i++; end
        chk(i < rx.size() && int'(rx[i][29:22]) == t, $sformatf("FIRE marker for t=%0d", t));
        i++;
        chk(got.size() == exp_by_t[t].size(), $sformatf("t=%0d spikes %0d exp %0d", t, got.size(), exp_by_t[t].size()));
        foreach (exp_by_t[t][k]) begin
          int f; f = 0;
          foreach (got[j]) if (got[j] == exp_by_t[t][k]) f = 1;
          chk(f == 1, $sformatf("t=%0d spike %h missing", t, exp_by_t[t][k]));
        end
      end
      chk(i == rx.size(), "nothing after the last marker");
    end
    chk(gaps_ok > 0 && gaps_bad == 0, $sformatf("UPDATE spacing: %0d at 66 cycles, %0d otherwise", gaps_ok, gaps_bad));
    chk(sop_cnt == m.sops, $sformatf("synaptic ops %0d exp %0d", sop_cnt, m.sops));
    chk(stall_cnt > 0, "stall exercised");
    chk(upd_cnt == 96, "update counter");
    $display("sops=%0d stalls=%0d outputs=%0d", sop_cnt, stall_cnt, rx.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
