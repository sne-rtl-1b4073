// sne_decoder: input stage of a slice.
//
// Takes one stream word at a time from the crossbar and decodes it:
//   weight word         -> written to the filter buffer (wr_w_o), 1 cycle;
//   RST / UPDATE / FIRE -> start_o pulses and the word is presented on ev_o
//                          in the same cycle; the clusters latch it and the
//                          sequencer sweeps the neurons. The decoder accepts
//                          nothing more until the sweep is done;
//   NOP event           -> dropped.
// in_ready_o is high whenever the sequencer is idle, so an UPDATE occupies
// the slice for 1 + N_NEURONS + 1 cycles (start, sweep, tail).
// It also counts the operations it has dispatched, per kind.
module sne_decoder
  import sne_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  stream_t     in_data_i,
  input  logic        seq_busy_i,
  output logic        start_o,
  output stream_t     ev_o,
  output logic        wr_w_o,
  output logic [31:0] cnt_rst_o,
  output logic [31:0] cnt_update_o,
  output logic [31:0] cnt_fire_o,
  output logic [31:0] cnt_weight_o
);
  logic take;

  assign in_ready_o = !seq_busy_i;
  assign take       = in_valid_i && in_ready_o;
  assign ev_o       = in_data_i;

  always_comb begin
    start_o = 1'b0;
    wr_w_o  = 1'b0;
    if (take) begin
      if (in_data_i.kind == KIND_WEIGHT) wr_w_o = 1'b1;
      else if (in_data_i.op != OP_NOP)   start_o = 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      cnt_rst_o    <= '0;
      cnt_update_o <= '0;
      cnt_fire_o   <= '0;
      cnt_weight_o <= '0;
    end else if (take) begin
      if (wr_w_o) cnt_weight_o <= cnt_weight_o + 1;
      else if (start_o) begin
        unique case (in_data_i.op)
          OP_RST:    cnt_rst_o    <= cnt_rst_o + 1;
          OP_UPDATE: cnt_update_o <= cnt_update_o + 1;
          OP_FIRE:   cnt_fire_o   <= cnt_fire_o + 1;
          default:   ;
        endcase
      end
    end
  end
endmodule
