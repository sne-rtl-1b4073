// sne_collector: merges several event streams into one time-ordered stream.
//
// Used twice: inside each slice it merges the output FIFOs of the clusters,
// and at the top it merges the slices' outputs toward the crossbar. Spike
// events (any non-FIRE word) from enabled inputs are forwarded one per cycle
// with round-robin arbitration. A FIRE marker at the head of an input closes
// that input's time step: it waits there until every enabled input shows a
// FIRE marker, then a single FIRE marker is forwarded and all of them are
// consumed. The merged stream therefore carries all spikes of time step t
// before the one FIRE of t, the order the next layer needs.
//
// With align_i low (layer-pipelined use, where each slice runs its own layer)
// FIRE markers are not merged: every word, FIRE included, is forwarded on its
// own, and out_src_o tells which input it came from so the crossbar can route
// it by its origin. An input may then be chosen only while its in_ok_i bit is
// high; the top uses this to hold back words whose destination slice is busy,
// so a word waiting in the output register can never block the stream that
// its destination itself must drain. In aligned mode in_ok_i is ignored.
//
// The aligned FIRE merge is this design's reading of the "time synchronized"
// stream of the paper; the round-robin policy, the unaligned mode and the
// in_ok_i look-ahead are also choices of this design. The output
// goes through one register stage (a word chosen in cycle c is offered from
// cycle c+1), which still sustains one word per cycle: a new word is chosen
// whenever the register is empty or being emptied. An input word is consumed
// when its in_ready and in_valid are both high.
module sne_collector
  import sne_pkg::*;
#(
  parameter int unsigned N_IN = 16,
  parameter int unsigned IW   = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [N_IN-1:0] en_i,
  input  logic            align_i,
  input  logic [N_IN-1:0] in_ok_i,
  input  logic [N_IN-1:0] in_valid_i,
  output logic [N_IN-1:0] in_ready_o,
  input  stream_t         in_data_i [N_IN],
  output logic            out_valid_o,
  input  logic            out_ready_i,
  output stream_t         out_data_o,
  output logic [IW-1:0]   out_src_o,
  output logic [31:0]     fire_merged_o
);
  logic [N_IN-1:0] is_fire, req;
  logic            all_fire, any_req;
  logic [IW-1:0]   rr_q, grant, first_en;
  logic            sel_valid, sel_ready;
  stream_t         sel_data;

  // output register
  assign sel_ready = !out_valid_o || out_ready_i;
  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      out_valid_o <= 1'b0;
      out_data_o  <= '0;
      out_src_o   <= '0;
    end else if (sel_ready) begin
      out_valid_o <= sel_valid;
      out_data_o  <= sel_data;
      out_src_o   <= any_req ? grant : first_en;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(N_IN); i++) begin
      is_fire[i] = in_valid_i[i] && in_data_i[i].kind == KIND_EVENT &&
                   in_data_i[i].op == OP_FIRE;
      req[i]     = align_i ? en_i[i] && in_valid_i[i] && !is_fire[i]
                           : en_i[i] && in_valid_i[i] && in_ok_i[i];
    end
    any_req  = |req;
    all_fire = align_i && (en_i != '0) && ((en_i & is_fire) == en_i);

    // round robin: first requester at or after rr_q
    grant = '0;
    for (int k = int'(N_IN) - 1; k >= 0; k--) begin
      logic [IW:0] j;
      j = (IW+1)'((int'(rr_q) + k) % int'(N_IN));
      if (req[j[IW-1:0]]) grant = j[IW-1:0];
    end
    first_en = '0;
    for (int k = int'(N_IN) - 1; k >= 0; k--) if (en_i[k]) first_en = IW'(k);

    in_ready_o = '0;
    sel_valid  = 1'b0;
    sel_data   = in_data_i[first_en];
    if (any_req) begin
      sel_valid         = 1'b1;
      sel_data          = in_data_i[grant];
      in_ready_o[grant] = sel_ready;
    end else if (all_fire) begin
      sel_valid  = 1'b1;
      sel_data   = in_data_i[first_en];
      in_ready_o = sel_ready ? en_i : '0;
    end
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      rr_q          <= '0;
      fire_merged_o <= '0;
    end else if (sel_valid && sel_ready) begin
      if (any_req) rr_q <= (grant == IW'(N_IN - 1)) ? '0 : grant + 1'b1;
      else         fire_merged_o <= fire_merged_o + 1;
    end
  end
endmodule
