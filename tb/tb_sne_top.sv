// tb_sne_top: end-to-end run of the accelerator at its default size
// (8 slices x 16 clusters x 64 neurons), programmed only through APB and fed
// only through memory.
//
//  1. Every slice maps a 32x32 output map as 4x4 tiles of 8x8 neurons; slice k
//     writes output channel 16*k + c from cluster c, with its own weight-set
//     offsets and threshold.
//  2. DMA0 broadcasts a table of 256 3x3 kernels to all slices, then loads
//     a second table point-to-point into slice 3 only.
//  3. DMA0 broadcasts the input events (RST, time steps of UPDATE events each
//     closed by FIRE, a second RST); the collector merges the slices' output
//     and the crossbar routes it to DMA1, which writes it to memory.
//  4. The written stream must hold, for each time step, exactly the spikes of
//     the reference model (any order) and then one FIRE marker.
//  5. Layer-pipelined mode: DMA0 feeds slice 0 only, the collector routes
//     slice 0's output (spikes and FIRE markers) to slice 1 and slice 1's
//     output to DMA1. The stream entering slice 1 must hold, per time step,
//     exactly the reference spikes of slice 0; the reference of slice 1 is
//     fed that stream in the order observed (saturation makes the order
//     matter), and DMA1 must write exactly its spikes.
// Mechanisms counted, each must occur: broadcast, point-to-point, FIRE
// merge in the collector, sequencer stall on a full cluster FIFO, leak,
// RST, clusters left idle by the address filter, DMA back-pressure, slice to
// slice transfer and the collector look-ahead holding a word back.
module tb_sne_top;
  import sne_pkg::*;
  import sne_ref_pkg::*;
  localparam int NSL = 8, T = 8, NEV = 16, T2 = 6, NEV2 = 24;
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
    sne_tb_mem #(.WORDS(4096)) u_mem (.clk_i(clk), .req_i(req[d]), .gnt_o(gnt[d]), .addr_i(addr[d]),
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
  int wa [256][9], wb [256][9];
  int n_p2p = 0, dma_bp = 0, idle_cl = 0;
  bit phase2 = 0;
  logic [31:0] obs1 [$];   // words entering slice 1 in layer-pipelined mode
  int fires_to_dma1 = 0, held = 0;
  always @(posedge clk) if (phase2) begin
    if (dut.dst_valid[1] && dut.dst_ready[1]) obs1.push_back(stream_to_mem(dut.dst_data[1]));
    if (dut.dst_valid[NSL+1] && dut.dst_ready[NSL+1] && dut.dst_data[NSL+1].op == OP_FIRE) fires_to_dma1++;
    if (dut.sl_valid[0] && !dut.coll_ok[0]) held++;
  end
  task automatic cmp_set(int t, logic [31:0] got [$], logic [31:0] exp [$], string tag);
    chk(got.size() == exp.size(), $sformatf("%s t=%0d spikes %0d exp %0d", tag, t, got.size(), exp.size()));
    foreach (exp[k]) begin
      int f; f = -1;
      foreach (got[j]) if (f < 0 && got[j] == exp[k]) f = j;
      chk(f >= 0, $sformatf("%s t=%0d spike %h missing", tag, t, exp[k]));
      if (f >= 0) got.delete(f);
    end
  endtask
  always @(posedge clk) if (rst_n) begin
    if (dut.src_valid[0] && !dut.src_ready[0]) dma_bp++;
    for (int k = 0; k < NSL; k++) if (dut.dst_valid[k] && dut.dst_ready[k] && $countones(dut.route[0]) == 1) n_p2p++;
  end
  // clusters skipped by the address filter during UPDATE (slice 0)
  for (genvar c = 0; c < 16; c++) begin : g_idle
    always @(posedge clk) if (rst_n && dut.g_sl[0].u_sl.u_seq.busy_o && dut.g_sl[0].u_sl.op_q == OP_UPDATE &&
                              dut.g_sl[0].u_sl.u_seq.tail_o && !dut.g_sl[0].u_sl.g_cl[c].u_cl.active_q) idle_cl++;
  end

  initial begin
    logic [31:0] exp_by_t [int][$];
    int n_words = 0, n_ops = 0, t0, t1, total_exp = 0;
    for (int k = 0; k < NSL; k++) m[k] = new(16, 64, 8);
    for (int s = 0; s < 256; s++) for (int i = 0; i < 9; i++) begin
      wa[s][i] = $urandom_range(0, 13) - 6; wb[s][i] = $urandom_range(0, 15) - 8;
    end
    for (int k = 0; k < NSL; k++) begin
      for (int s = 0; s < 256; s++) for (int i = 0; i < 9; i++) m[k].w[s][i] = (k == 3) ? wb[s][i] : wa[s][i];
      for (int c = 0; c < 16; c++) begin
        m[k].base_x[c] = (c % 4) * 8; m[k].base_y[c] = (c / 4) * 8;
        m[k].wset[c] = (k * 31 + c * 7) % 256; m[k].out_ch[c] = 16 * k + c;
      end
      m[k].vth = (k % 4) + 2; m[k].leak = (k % 2) + 1;
    end
    // memory image for DMA0: kernel table A at word 0, table B at word 512,
    // events at word 1024
    for (int wd = 0; wd < 288; wd++)
      for (int i = 0; i < 8; i++) begin
        g_mem[0].u_mem.mem[wd][i*4 +: 4]       = 4'(wa[(wd*8 + i) / 9][(wd*8 + i) % 9]);
        g_mem[0].u_mem.mem[512 + wd][i*4 +: 4] = 4'(wb[(wd*8 + i) / 9][(wd*8 + i) % 9]);
      end
    begin
      int p = 1024;
      g_mem[0].u_mem.mem[p++] = {OP_RST, 8'd0, 8'd0, 7'd0, 7'd0};
      foreach (m[k]) m[k].rst(0);
      for (int t = 1; t <= T; t++) begin
        logic [31:0] sp [$];
        if (t == 5) begin
          g_mem[0].u_mem.mem[p++] = {OP_RST, 8'(t), 8'd0, 7'd0, 7'd0};
          foreach (m[k]) m[k].rst(t);
        end
        for (int e = 0; e < ((t == 3) ? 0 : NEV); e++) begin  // step 3: no input, leak only
          int x, y, ch;
          x = $urandom_range(0, 31); y = $urandom_range(0, 31); ch = $urandom_range(0, 255);
          g_mem[0].u_mem.mem[p++] = {OP_UPDATE, 8'(t), 8'(ch), 7'(x), 7'(y)};
          foreach (m[k]) m[k].update(t, ch, x, y);
        end
        g_mem[0].u_mem.mem[p++] = {OP_FIRE, 8'(t), 8'd0, 7'd0, 7'd0};
        sp.delete();
        foreach (m[k]) m[k].fire(t, sp);
        exp_by_t[t] = sp;
        total_exp += sp.size() + 1;
      end
      n_words = p - 1024;
      n_ops = n_words;
    end

    repeat (3) @(posedge clk); rst_n = 1;
    // configuration
    for (int k = 0; k < NSL; k++) begin
      apb_write(16'(16'h0400 + 16'h80 * k), {16'd0, 8'(m[k].leak), 8'(m[k].vth)});
      for (int c = 0; c < 16; c++)
        apb_write(16'(16'h0440 + 16'h80 * k + 4 * c),
                  {8'(m[k].out_ch[c]), 8'(m[k].wset[c]), 1'b0, 7'(m[k].base_y[c]), 1'b0, 7'(m[k].base_x[c])});
      apb_write(16'(16'h0404 + 16'h80 * k), 0);
    end
    apb_write(16'h0040, 32'hFF);                 // collector: all slices
    apb_write(16'h0008, 32'(1 << (NSL + 1)));    // collector -> DMA1
    // weights: broadcast table A, then table B to slice 3 only
    apb_write(16'h0000, 32'hFF);
    dma_run(0, 0, 288, 32'h5);
    wait (busy[0] == 0); repeat (5) @(posedge clk);
    apb_write(16'h0000, 32'h08);
    apb_write(16'h0404 + 16'h180, 0);
    dma_run(0, 512 * 4, 288, 32'h5);
    wait (busy[0] == 0); repeat (5) @(posedge clk);
    // output DMA, then input events broadcast
    dma_run(1, 2048 * 4, total_exp, 32'h3);
    apb_write(16'h0000, 32'hFF);
    t0 = $time;
    dma_run(0, 1024 * 4, n_words, 32'h1);
    wait (busy[0] == 0);
    t1 = $time;
    wait (busy[1] == 0); repeat (5) @(posedge clk);

    // compare
    begin
      int i = 0;
      for (int t = 1; t <= T; t++) begin
        logic [31:0] got [$];
        logic [31:0] w;
        got.delete();
        while (i < total_exp) begin
          w = g_mem[1].u_mem.mem[2048 + i];
          if (w[31:30] == OP_FIRE) break;
          got.push_back(w); i++;
        end
        w = g_mem[1].u_mem.mem[2048 + i];
        chk(w[31:30] == OP_FIRE && int'(w[29:22]) == t, $sformatf("FIRE marker for t=%0d", t));
        i++;
        chk(got.size() == exp_by_t[t].size(), $sformatf("t=%0d spikes %0d exp %0d", t, got.size(), exp_by_t[t].size()));
        foreach (exp_by_t[t][k]) begin
          int f; f = 0;
          foreach (got[j]) if (got[j] == exp_by_t[t][k]) f = 1;
          chk(f == 1, $sformatf("t=%0d spike %h missing", t, exp_by_t[t][k]));
        end
      end
    end
    // ---- layer-pipelined mode: DMA0 -> slice 0 -> slice 1 -> DMA1
    begin
      logic [31:0] exp0 [int][$], got0 [int][$], exp1 [int][$];
      int p = 1024, n2, n_out = 0, i = 0;
      for (int t = T + 1; t <= T + T2; t++) begin
        logic [31:0] sp [$];
        for (int e = 0; e < NEV2; e++) begin
          int x, y, ch;
          x = $urandom_range(0, 31); y = $urandom_range(0, 31); ch = $urandom_range(0, 255);
          g_mem[0].u_mem.mem[p++] = {OP_UPDATE, 8'(t), 8'(ch), 7'(x), 7'(y)};
          m[0].update(t, ch, x, y);
        end
        g_mem[0].u_mem.mem[p++] = {OP_FIRE, 8'(t), 8'd0, 7'd0, 7'd0};
        sp.delete();
        m[0].fire(t, sp);
        exp0[t] = sp;
      end
      n2 = p - 1024;
      apb_write(16'h0044, 32'h1);                   // layer-pipelined mode
      apb_write(16'h0080, 32'h2);                   // slice 0 -> slice 1
      apb_write(16'h0084, 32'(1 << (NSL + 1)));     // slice 1 -> DMA1
      apb_write(16'h0040, 32'h3);
      apb_write(16'h0000, 32'h1);                   // DMA0 -> slice 0
      phase2 = 1;
      dma_run(1, 3072 * 4, 1000, 32'h3);
      dma_run(0, 1024 * 4, n2, 32'h1);
      wait (busy[0] == 0);
      wait (fires_to_dma1 == T2); repeat (50) @(posedge clk);
      phase2 = 0;
      // replay the observed slice-1 input through the reference
      foreach (obs1[j]) begin
        logic [31:0] w;
        int t;
        w = obs1[j]; t = int'(w[29:22]);
        if (w[31:30] == OP_FIRE) begin
          logic [31:0] sp [$];
          if (!got0.exists(t)) got0[t] = {};
          cmp_set(t, got0[t], exp0[t], "slice 0 -> 1");
          sp.delete();
          m[1].fire(t, sp);
          exp1[t] = sp;
          n_out += sp.size() + 1;
        end else begin
          got0[t].push_back(w);
          m[1].update(t, int'(w[21:14]), int'(w[13:7]), int'(w[6:0]));
        end
      end
      chk(exp1.size() == T2, $sformatf("slice 1 saw %0d FIRE markers", exp1.size()));
      chk(n_out < 1000, "layer-2 output fits the DMA1 buffer");
      for (int t = T + 1; t <= T + T2; t++) begin
        logic [31:0] got [$];
        logic [31:0] w;
        got.delete();
        while (i < n_out) begin
          w = g_mem[1].u_mem.mem[3072 + i];
          if (w[31:30] == OP_FIRE) break;
          got.push_back(w); i++;
        end
        w = g_mem[1].u_mem.mem[3072 + i];
        chk(w[31:30] == OP_FIRE && int'(w[29:22]) == t, $sformatf("layer-2 FIRE marker for t=%0d", t));
        i++;
        if (exp1.exists(t)) cmp_set(t, got, exp1[t], "slice 1 -> DMA1");
      end
      $display("pipelined: ops=%0d slice1_in=%0d layer2_out=%0d held=%0d", n2, obs1.size(), n_out, held);
      chk(obs1.size() > T2, "slice to slice transfer happened");
      chk(held > 0, "collector look-ahead held a word");
    end
    begin
      int sops = 0, msops = 0, stalls = 0;
      for (int k = 0; k < NSL; k++) begin
        sops += sop_cnt[k]; msops += m[k].sops; stalls += stall_cnt[k];
        chk(sop_cnt[k] == m[k].sops, $sformatf("slice %0d synaptic ops %0d exp %0d", k, sop_cnt[k], m[k].sops));
      end
      // every operation occupies the slices 66 cycles; the event phase cannot be shorter
      chk((t1 - t0) / 10 >= n_ops * 66 - 20, $sformatf("event phase %0d cycles for %0d ops", (t1 - t0) / 10, n_ops));
      $display("ops=%0d cycles=%0d spikes+markers=%0d sops=%0d stalls=%0d bcast=%0d p2p=%0d fire_merges=%0d idle_clusters=%0d dma_backpressure=%0d",
               n_ops, (t1 - t0) / 10, total_exp, sops, stalls, bcast_cnt, n_p2p, fire_cnt, idle_cl, dma_bp);
      chk(bcast_cnt > 0, "broadcast happened");
      chk(n_p2p > 0, "point-to-point happened");
      chk(fire_cnt == T, "one merged FIRE per time step");
      chk(stalls > 0, "sequencer stall happened");
      chk(idle_cl > 0, "address filter idled clusters");
      chk(dma_bp > 0, "DMA back-pressure happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
