// sne_xbar: the stream crossbar (C-XBAR) of the accelerator.
//
// Connects N_SRC stream sources (the DMAs reading memory and the top
// collector) to N_DST stream sinks (the slices and the DMAs writing memory),
// all with ready/valid flow control. Each source has a destination mask
// route_i[s], written by software:
//   one bit set  -> point-to-point transfer;
//   several bits -> broadcast: every selected sink receives the word, and the
//                   source is held (its ready stays low) until all of them
//                   have taken it. Sinks that accepted early are remembered
//                   in sent_q and are not given the word twice.
// A sink wanted by several sources in the same cycle serves the lowest
// source index first. Combinational paths from valid to ready; the only
// state is the per-source sent_q mask. The mask register, the fixed priority
// and the sent-tracking are this design's choices; the two modes follow the
// paper.
module sne_xbar
  import sne_pkg::*;
#(
  parameter int unsigned N_SRC = 3,
  parameter int unsigned N_DST = 10
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [N_DST-1:0] route_i   [N_SRC],
  input  logic [N_SRC-1:0] src_valid_i,
  output logic [N_SRC-1:0] src_ready_o,
  input  stream_t          src_data_i [N_SRC],
  output logic [N_DST-1:0] dst_valid_o,
  input  logic [N_DST-1:0] dst_ready_i,
  output stream_t          dst_data_o [N_DST],
  output logic [31:0]      bcast_cnt_o
);
  logic [N_DST-1:0] sent_q [N_SRC];
  logic [N_DST-1:0] pend   [N_SRC];   // still to deliver
  logic [N_DST-1:0] take   [N_SRC];   // delivered this cycle
  logic             found;

  always_comb begin
    for (int s = 0; s < int'(N_SRC); s++) begin
      pend[s] = src_valid_i[s] ? (route_i[s] & ~sent_q[s]) : '0;
      take[s] = '0;
    end
    for (int d = 0; d < int'(N_DST); d++) begin
      dst_valid_o[d] = 1'b0;
      dst_data_o[d]  = src_data_i[0];
      for (int s = int'(N_SRC) - 1; s >= 0; s--) begin
        if (pend[s][d]) begin
          dst_valid_o[d] = 1'b1;
          dst_data_o[d]  = src_data_i[s];
        end
      end
      // the winner is the lowest source with a pending word for d
      found = 1'b0;
      for (int s = 0; s < int'(N_SRC); s++) begin
        if (pend[s][d] && !found) begin
          take[s][d] = dst_ready_i[d];
          found      = 1'b1;
        end
      end
    end
    for (int s = 0; s < int'(N_SRC); s++)
      src_ready_o[s] = src_valid_i[s] && (route_i[s] != '0) &&
                       ((pend[s] & ~take[s]) == '0);
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      for (int s = 0; s < int'(N_SRC); s++) sent_q[s] <= '0;
      bcast_cnt_o <= '0;
    end else begin
      for (int s = 0; s < int'(N_SRC); s++) begin
        if (src_ready_o[s]) sent_q[s] <= '0;
        else                sent_q[s] <= sent_q[s] | take[s];
      end
      for (int s = 0; s < int'(N_SRC); s++)
        if (src_ready_o[s] && $countones(route_i[s]) > 1) bcast_cnt_o <= bcast_cnt_o + 1;
    end
  end

  for (genvar s = 0; s < int'(N_SRC); s++) begin : g_chk
    // a word offered to the crossbar stays stable until it is taken
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     src_valid_i[s] && !src_ready_o[s] |=> src_valid_i[s] &&
                     $stable(src_data_i[s]))
      else $error("sne_xbar: source %0d dropped or changed a pending word", s);
  end
endmodule
