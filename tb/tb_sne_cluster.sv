// tb_sne_cluster: one cluster (64 neurons, 8x8 tile at (8,8)) driven by a
// testbench sequencer through RST, UPDATE and FIRE operations over several
// time steps with leak. After every FIRE the spikes drained from the output
// FIFO (under random back-pressure, which forces stalls) must equal, as a
// set, those of the reference model, followed by one FIRE marker. Also
// checked: 65 sequencer steps per operation plus stall cycles, synaptic
// operation count, and that an event outside the receptive field leaves
// the cluster idle.
module tb_sne_cluster;
  import sne_pkg::*;
  import sne_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  cluster_cfg_t cfg; lif_cfg_t lif;
  logic start = 0, step = 0, tail = 0, full, out_valid, out_ready, active, sop;
  stream_t ev = '0, out_data; logic [7:0] wset; weight_t wts [9]; logic [6:0] neuron = 0;
  always #5 clk = ~clk;
  sne_cluster dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .lif_i(lif), .start_i(start),
    .ev_i(ev), .wset_o(wset), .weights_i(wts), .step_i(step), .neuron_i(neuron), .tail_i(tail),
    .fifo_full_o(full), .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data),
    .active_o(active), .sop_o(sop));

  slice_model m;
  always_comb for (int k = 0; k < 9; k++) wts[k] = weight_t'(m.w[wset][k]);

  logic [31:0] rx [$];
  int sop_cnt = 0, stalls = 0, idle_ops = 0;
  always @(posedge clk) begin
    if (out_valid && out_ready) rx.push_back(stream_to_mem(out_data));
    if (sop) sop_cnt++;
    out_ready <= ($urandom_range(0, 15) == 0);
  end

  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic run_op(stream_t e);
    int steps, cyc, st;
    @(negedge clk); ev = e; start = 1;
    @(negedge clk); start = 0;
    steps = 0; cyc = 0; st = 0;
    while (steps <= 64) begin
      neuron = 7'(steps); tail = (steps == 64);
      step = !(e.op == OP_FIRE && full);
      if (!step) begin stalls++; st++; end
      @(negedge clk); cyc++;
      if (step) steps++;
    end
    step = 0; tail = 0;
    chk(steps == 65 && cyc == 65 + st, $sformatf("%0d steps in %0d cycles, %0d stalled", steps, cyc, st));
  endtask

  task automatic do_fire(int t);
    logic [31:0] exp [$];
    int n_fire;
    m.fire(t, exp);
    run_op(make_event(OP_FIRE, 8'(t), 0, 0, 0));
    // drain the FIFO
    repeat (600) @(posedge clk);
    n_fire = 0;
    foreach (rx[i]) if (rx[i][31:30] == OP_FIRE) n_fire++;
    chk(n_fire == 1 && rx.size() > 0 && rx[rx.size()-1][31:30] == OP_FIRE &&
        int'(rx[rx.size()-1][29:22]) == t, $sformatf("one FIRE marker at the end, t=%0d", t));
    chk(rx.size() == exp.size() + 1, $sformatf("t=%0d spikes %0d exp %0d", t, rx.size() - 1, exp.size()));
    foreach (exp[i]) begin
      int f; f = 0;
      foreach (rx[j]) if (rx[j] == exp[i]) f = 1;
      chk(f == 1, $sformatf("spike %h missing", exp[i]));
    end
    rx.delete();
  endtask

  initial begin
    m = new(1, 64, 8);
    for (int s = 0; s < 256; s++) for (int k = 0; k < 9; k++) m.w[s][k] = $urandom_range(0, 13) - 6;
    cfg = '0; cfg.base_x = 8; cfg.base_y = 8; cfg.wset = 3; cfg.out_ch = 9;
    m.base_x[0] = 8; m.base_y[0] = 8; m.wset[0] = 3; m.out_ch[0] = 9;
    lif.vth = 6; lif.leak = 1; m.vth = 6; m.leak = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    run_op(make_event(OP_RST, 0, 0, 0, 0)); m.rst(0);
    for (int t = 1; t <= 12; t++) begin
      int ne;
      if (t == 7) begin run_op(make_event(OP_RST, 8'(t), 0, 0, 0)); m.rst(t); end
      ne = (t % 4 == 2) ? 0 : $urandom_range(5, 25);   // some empty steps: leak only
      for (int e = 0; e < ne; e++) begin
        int x, y, ch;
        x = $urandom_range(5, 18); y = $urandom_range(5, 18); ch = $urandom_range(0, 255);
        run_op(make_event(OP_UPDATE, 8'(t), 8'(ch), 7'(x), 7'(y))); m.update(t, ch, x, y);
        if (!active) idle_ops++;
      end
      do_fire(t);
    end
    chk(sop_cnt == m.sops, $sformatf("synaptic ops %0d exp %0d", sop_cnt, m.sops));
    chk(stalls > 0, "stall exercised");
    chk(idle_ops > 0, "address filter left the cluster idle");
    // state check: every neuron equals the model after the last step
    for (int n = 0; n < 64; n++) begin
      state_t v;
      v = (n % 2 == 0) ? dut.g_bank[0].u_mem.mem[n/2] : dut.g_bank[1].u_mem.mem[n/2];
      chk(int'(v) == m.v[0][n], $sformatf("neuron %0d state %0d exp %0d", n, v, m.v[0][n]));
    end
    $display("stalls=%0d idle_ops=%0d sops=%0d", stalls, idle_ops, sop_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
