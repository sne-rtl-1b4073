// tb_sne_xbar: three sources, five sinks with random ready. Source 0 sends
// point-to-point, source 1 broadcasts to three sinks, source 2 shares a sink
// with source 0. Every sink must receive, in order, exactly the words routed
// to it, and a broadcasting source may only advance once all its sinks took
// the word.
module tb_sne_xbar;
  import sne_pkg::*;
  localparam int NS = 3, ND = 5, NW = 40;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [ND-1:0] route [NS];
  logic [NS-1:0] s_valid, s_ready; stream_t s_data [NS];
  logic [ND-1:0] d_valid, d_ready; stream_t d_data [ND];
  logic [31:0] bcast;
  always #5 clk = ~clk;
  sne_xbar #(.N_SRC(NS), .N_DST(ND)) dut (.clk_i(clk), .rst_ni(rst_n), .route_i(route),
    .src_valid_i(s_valid), .src_ready_o(s_ready), .src_data_i(s_data),
    .dst_valid_o(d_valid), .dst_ready_i(d_ready), .dst_data_o(d_data), .bcast_cnt_o(bcast));

  int sent [NS];
  logic [31:0] exp_q [ND][$];
  int got [ND];

  initial begin
    route[0] = 5'b00001; route[1] = 5'b01110; route[2] = 5'b00001;
    foreach (sent[s]) sent[s] = 0;
    foreach (got[d]) got[d] = 0;
    for (int s = 0; s < NS; s++)
      for (int i = 0; i < NW; i++)
        for (int d = 0; d < ND; d++)
          if (route[s][d]) exp_q[d].push_back({8'(s), 24'(i)});
  end

  always_comb
    for (int s = 0; s < NS; s++) begin
      s_valid[s] = rst_n && sent[s] < NW;
      s_data[s]  = make_event(OP_UPDATE, 0, 0, 0, 0);
      s_data[s].data = {8'(s), 24'(sent[s])};
    end

  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < ND; d++) if (d_valid[d] && d_ready[d]) begin
      int idx;
      // sink 0 is shared by sources 0 and 2: match against either stream
      idx = -1;
      foreach (exp_q[d][k]) if (exp_q[d][k] == d_data[d].data && idx < 0) idx = k;
      checks++;
      if (idx < 0) begin failures++; $display("FAIL sink %0d got %h", d, d_data[d].data); end
      else begin
        // words of one source must arrive in order
        for (int k = 0; k < idx; k++)
          if (exp_q[d][k][31:24] == d_data[d].data[31:24]) begin
            failures++; $display("FAIL sink %0d out of order %h", d, d_data[d].data); break;
          end
        exp_q[d].delete(idx);
      end
      got[d]++;
    end
    for (int s = 0; s < NS; s++) if (s_valid[s] && s_ready[s]) sent[s]++;
    for (int d = 0; d < ND; d++) d_ready[d] <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    d_ready = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (600) @(posedge clk);
    for (int d = 0; d < ND; d++) begin
      checks++; if (exp_q[d].size() != 0) begin failures++; $display("FAIL sink %0d missing %0d words", d, exp_q[d].size()); end
    end
    checks++; if (got[4] != 0) begin failures++; $display("FAIL unrouted sink got data"); end
    checks++; if (bcast != NW) begin failures++; $display("FAIL broadcast count %0d", bcast); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
