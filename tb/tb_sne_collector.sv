// tb_sne_collector: four producers each send a random number of spikes and
// then a FIRE marker, per time step, under random output back-pressure. The
// merged stream must carry every spike exactly once, all spikes of a step
// before that step's single FIRE marker, and nothing from a disabled input.
// A second phase switches to unaligned mode with a random per-input in_ok
// mask: every word, FIRE markers included, must then come out once, tagged
// with its input, in its input's order, and only inputs whose in_ok bit is
// set may be consumed.
module tb_sne_collector;
  import sne_pkg::*;
  localparam int N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] en, in_valid, in_ready, in_ok; stream_t in_data [N];
  logic align = 1; logic [1:0] out_src; int phase = 1;
  stream_t q2 [N][$];
  int n2_sent = 0, n2_seen = 0, n2_fire = 0, n2_held = 0;
  logic out_valid, out_ready; stream_t out_data; logic [31:0] merged;
  always #5 clk = ~clk;
  sne_collector #(.N_IN(N)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .align_i(align), .in_ok_i(in_ok), .in_valid_i(in_valid),
    .in_ready_o(in_ready), .in_data_i(in_data), .out_valid_o(out_valid), .out_ready_i(out_ready),
    .out_data_o(out_data), .out_src_o(out_src), .fire_merged_o(merged));

  stream_t q [N][$];
  int expect_spikes [int];   // key: data word, value: count
  int steps = 6, fires_seen = 0, spikes_seen = 0, spikes_sent = 0, cur_t = 0;

  initial begin
    en = 4'b0111;  // input 3 disabled
    for (int t = 0; t < steps; t++)
      for (int i = 0; i < N; i++) begin
        int ns;
        ns = $urandom_range(0, 5);
        for (int s = 0; s < ns; s++) begin
          stream_t e;
          e = make_event(OP_UPDATE, 8'(t), 8'(i), 7'(s), 7'(t));
          q[i].push_back(e);
          if (en[i]) begin expect_spikes[int'(e.data)]++; spikes_sent++; end
        end
        q[i].push_back(make_event(OP_FIRE, 8'(t), 0, 0, 0));
      end
  end

  // input 2 is a slow producer: its words are offered only on some cycles,
  // so the others often reach their FIRE marker first
  always @(negedge clk)
    for (int i = 0; i < N; i++) begin
      in_valid[i] = q[i].size() > 0 && (i != 2 || $urandom_range(0, 3) == 0);
      in_data[i]  = (q[i].size() > 0) ? q[i][0] : '0;
      in_ok[i]    = $urandom_range(0, 2) != 0;
    end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (in_valid[i] && in_ready[i]) begin
      if (phase == 2) begin
        q2[i].push_back(q[i][0]);
        checks++; if (!in_ok[i] || !en[i]) begin failures++; $display("FAIL input %0d taken while held", i); end
      end
      void'(q[i].pop_front());
    end
    if (phase == 2) for (int i = 0; i < N; i++) if (in_valid[i] && en[i] && !in_ok[i]) n2_held++;
    if (phase == 2 && out_valid && out_ready) begin
      checks++;
      if (q2[out_src].size() == 0 || q2[out_src][0] != out_data || int'(out_data.data[21:14]) != int'(out_src)) begin
        failures++; $display("FAIL unaligned word %h from %0d", out_data, out_src);
      end else void'(q2[out_src].pop_front());
      n2_seen++; if (out_data.op == OP_FIRE) n2_fire++;
    end
    if (phase == 1 && out_valid && out_ready) begin
      checks++;
      if (out_data.op == OP_FIRE) begin
        if (int'(out_data.data[29:22]) != cur_t) begin failures++; $display("FAIL fire t=%0d exp %0d", out_data.data[29:22], cur_t); end
        fires_seen++; cur_t++;
      end else begin
        if (!expect_spikes.exists(int'(out_data.data)) || int'(out_data.data[29:22]) != cur_t) begin
          failures++; $display("FAIL unexpected spike %h at step %0d", out_data.data, cur_t);
        end else begin
          expect_spikes[int'(out_data.data)]--;
          if (expect_spikes[int'(out_data.data)] == 0) expect_spikes.delete(int'(out_data.data));
        end
        spikes_seen++;
      end
    end
    out_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (400) @(posedge clk);
    checks++; if (fires_seen != steps) begin failures++; $display("FAIL %0d fire markers", fires_seen); end
    checks++; if (spikes_seen != spikes_sent || expect_spikes.size() != 0) begin
      failures++; $display("FAIL spikes seen %0d sent %0d", spikes_seen, spikes_sent); end
    checks++; if (merged != steps) begin failures++; $display("FAIL merge counter %0d", merged); end
    // phase 2: unaligned, with look-ahead mask
    phase = 2; align = 0;
    for (int t = 0; t < steps; t++)
      for (int i = 0; i < N; i++) begin
        int ns;
        ns = $urandom_range(0, 5);
        for (int s = 0; s < ns; s++) q[i].push_back(make_event(OP_UPDATE, 8'(t), 8'(i), 7'(s), 7'(t)));
        q[i].push_back(make_event(OP_FIRE, 8'(t), 8'(i), 0, 0));
        if (en[i]) n2_sent += ns + 1;
      end
    repeat (600) @(posedge clk);
    checks++; if (n2_seen != n2_sent) begin failures++; $display("FAIL unaligned words %0d of %0d", n2_seen, n2_sent); end
    checks++; if (n2_fire != 3 * steps) begin failures++; $display("FAIL unaligned FIRE words %0d", n2_fire); end
    checks++; if (n2_held == 0) begin failures++; $display("FAIL look-ahead never held an input"); end
    checks++; if (merged != steps) begin failures++; $display("FAIL merge counter moved in unaligned mode"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
