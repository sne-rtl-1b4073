// tb_sne_bench: the benchmark layer used to characterise the accelerator,
// run at the default size (8 slices x 16 clusters x 64 neurons).
//
// Every cluster of every slice is mapped onto the same 8x8 output tile, each
// with its own kernel offset and output channel, and input events are placed
// so that their whole 3x3 window lies inside the tile. Every event therefore
// makes all 128 clusters update 9 neurons each, and every operation keeps
// all 128 time-multiplexed datapaths busy for a full 64-neuron sweep. Events
// are spread over 100 time steps, each closed by a FIRE; weights and
// threshold are set so that a few percent of the neurons fire per step.
//
// Checks: the spikes written back to memory per step against the reference
// model, one merged FIRE per step, 9 x 16 synaptic operations per event in
// each slice, at least 66 cycles per operation, and an output activity
// between 1% and 20% of the neurons per step (reported).
module tb_sne_bench;
  import sne_pkg::*;
  import sne_ref_pkg::*;
  localparam int NSL = 8, T = 100, NEV = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0; logic [15:0] paddr = 0; logic [31:0] pwdata = 0;
  logic [31:0] prdata; logic pready, pslverr;
  logic [1:0] req, gnt, we, rvalid; logic [31:0] addr [2], wdata [2], rdata [2];
  logic [1:0] busy; logic [31:0] sop_cnt [NSL], stall_cnt [NSL], fire_cnt, bcast_cnt;
  always #5 clk = ~clk;

  sne_top dut (.clk_i(clk), .rst_ni(rst_n), .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite),
    .paddr_i(paddr), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready), .pslverr_o(pslverr),
    .mem_req_o(req), .mem_gnt_i(gnt), .mem_addr_o(addr), .mem_we_o(we), .mem_wdata_o(wdata),
    .mem_rdata_i(rdata), .mem_rvalid_i(rvalid), .dma_busy_o(busy), .sop_cnt_o(sop_cnt),
    .stall_cnt_o(stall_cnt), .fire_cnt_o(fire_cnt), .bcast_cnt_o(bcast_cnt));

  for (genvar d = 0; d < 2; d++) begin : g_mem
    sne_tb_mem #(.WORDS(65536)) u_mem (.clk_i(clk), .req_i(req[d]), .gnt_o(gnt[d]), .addr_i(addr[d]),
      .we_i(we[d]), .wdata_i(wdata[d]), .rdata_o(rdata[d]), .rvalid_o(rvalid[d]));
  end

  task automatic apb_write(logic [15:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask
  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask
  task automatic dma_run(int d, int base, int len, int ctrl);
    apb_write(16'(16'h1000 * (d + 1) + 4), 32'(base));
    apb_write(16'(16'h1000 * (d + 1) + 8), 32'(len));
    apb_write(16'(16'h1000 * (d + 1)), 32'(ctrl));
  endtask

  slice_model m [NSL];
  int wa [256][9];

  initial begin
    logic [31:0] exp_by_t [int][$];
    int n_words = 0, t0, t1, total_exp = 0, n_upd = 0;
    for (int k = 0; k < NSL; k++) m[k] = new(16, 64, 8);
    for (int s = 0; s < 256; s++) for (int i = 0; i < 9; i++) wa[s][i] = $urandom_range(0, 9) - 2;
    for (int k = 0; k < NSL; k++) begin
      for (int s = 0; s < 256; s++) for (int i = 0; i < 9; i++) m[k].w[s][i] = wa[s][i];
      for (int c = 0; c < 16; c++) begin
        m[k].base_x[c] = 0; m[k].base_y[c] = 0;
        m[k].wset[c] = (k * 16 + c) * 2 % 256; m[k].out_ch[c] = 16 * k + c;
      end
      m[k].vth = 12; m[k].leak = 1;
    end
    for (int wd = 0; wd < 288; wd++)
      for (int i = 0; i < 8; i++)
        g_mem[0].u_mem.mem[wd][i*4 +: 4] = 4'(wa[(wd*8 + i) / 9][(wd*8 + i) % 9]);
    begin
      int p = 1024;
      g_mem[0].u_mem.mem[p++] = {OP_RST, 8'd0, 8'd0, 7'd0, 7'd0};
      foreach (m[k]) m[k].rst(0);
      for (int t = 1; t <= T; t++) begin
        logic [31:0] sp [$];
        for (int e = 0; e < NEV; e++) begin
          int x, y, ch;
          x = $urandom_range(1, 6); y = $urandom_range(1, 6); ch = $urandom_range(0, 1);
          g_mem[0].u_mem.mem[p++] = {OP_UPDATE, 8'(t), 8'(ch), 7'(x), 7'(y)};
          foreach (m[k]) m[k].update(t, ch, x, y);
          n_upd++;
        end
        g_mem[0].u_mem.mem[p++] = {OP_FIRE, 8'(t), 8'd0, 7'd0, 7'd0};
        sp.delete();
        foreach (m[k]) m[k].fire(t, sp);
        exp_by_t[t] = sp;
        total_exp += sp.size() + 1;
      end
      n_words = p - 1024;
    end

    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NSL; k++) begin
      apb_write(16'(16'h0400 + 16'h80 * k), {16'd0, 8'(m[k].leak), 8'(m[k].vth)});
      for (int c = 0; c < 16; c++)
        apb_write(16'(16'h0440 + 16'h80 * k + 4 * c),
                  {8'(m[k].out_ch[c]), 8'(m[k].wset[c]), 1'b0, 7'(m[k].base_y[c]), 1'b0, 7'(m[k].base_x[c])});
      apb_write(16'(16'h0404 + 16'h80 * k), 0);
    end
    apb_write(16'h0040, 32'hFF);
    apb_write(16'h0008, 32'(1 << (NSL + 1)));
    apb_write(16'h0000, 32'hFF);
    dma_run(0, 0, 288, 32'h5);
    wait (busy[0] == 0); repeat (5) @(posedge clk);
    dma_run(1, 0, total_exp, 32'h3);
    t0 = $time;
    dma_run(0, 1024 * 4, n_words, 32'h1);
    wait (busy[0] == 0);
    t1 = $time;
    wait (busy[1] == 0); repeat (5) @(posedge clk);

    begin
      int i = 0;
      for (int t = 1; t <= T; t++) begin
        logic [31:0] got [$];
        logic [31:0] w;
        int n_ok; n_ok = 0;
        got.delete();
        while (i < total_exp) begin
          w = g_mem[1].u_mem.mem[i];
          if (w[31:30] == OP_FIRE) break;
          got.push_back(w); i++;
        end
        w = g_mem[1].u_mem.mem[i];
        chk(w[31:30] == OP_FIRE && int'(w[29:22]) == t, $sformatf("FIRE marker for t=%0d", t));
        i++;
        chk(got.size() == exp_by_t[t].size(), $sformatf("t=%0d spikes %0d exp %0d", t, got.size(), exp_by_t[t].size()));
        foreach (exp_by_t[t][k]) begin
          int f; f = -1;
          foreach (got[j]) if (f < 0 && got[j] == exp_by_t[t][k]) f = j;
          if (f >= 0) begin got.delete(f); n_ok++; end
        end
        chk(n_ok == exp_by_t[t].size(), $sformatf("t=%0d: %0d of %0d spikes match", t, n_ok, exp_by_t[t].size()));
      end
    end
    begin
      int cycles, stalls = 0;
      real act;
      cycles = (t1 - t0) / 10;
      for (int k = 0; k < NSL; k++) begin
        chk(sop_cnt[k] == 16 * 9 * n_upd, $sformatf("slice %0d: %0d synaptic ops, exp %0d", k, sop_cnt[k], 16 * 9 * n_upd));
        stalls += stall_cnt[k];
      end
      act = real'(total_exp - T) / real'(T * NSL * 16 * 64);
      chk(cycles >= n_words * 66 - 20, $sformatf("%0d cycles for %0d operations", cycles, n_words));
      chk(fire_cnt == T, "one merged FIRE per time step");
      chk(act > 0.01 && act < 0.20, $sformatf("output activity %f", act));
      $display("benchmark: %0d ops in %0d cycles (%0.1f per op), %0d SOP (%0.1f per cycle), activity %0.2f%%, stalls %0d",
               n_words, cycles, real'(cycles) / n_words, 8 * 16 * 9 * n_upd,
               real'(8 * 16 * 9 * n_upd) / cycles, act * 100.0, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
