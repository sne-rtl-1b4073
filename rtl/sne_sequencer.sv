// sne_sequencer: time-multiplexing controller of a slice.
//
// All clusters of a slice run in lock step. After a start pulse the sequencer
// presents neuron addresses 0 .. N_NEURONS-1, one per cycle, then one tail
// cycle in which clusters close the operation (a FIRE operation pushes its
// end-of-step marker there). A cycle "steps" when busy and no stall is
// requested; while stall is high the address holds. stall comes from the
// clusters' output FIFOs, so a burst of spikes waits instead of being lost.
//
// Timing: start in cycle c -> address 0 in cycle c+1 -> tail in cycle
// c+1+N_NEURONS (without stalls); done pulses with the tail step, and a new
// start is accepted in the cycle after it.
module sne_sequencer #(
  parameter int unsigned N_NEURONS = 64,
  parameter int unsigned NW        = $clog2(N_NEURONS + 1)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          start_i,
  input  logic          stall_i,
  output logic          busy_o,
  output logic          step_o,     // the current address is consumed
  output logic [NW-1:0] neuron_o,   // N_NEURONS in the tail cycle
  output logic          tail_o,
  output logic          done_o,
  output logic [31:0]   stall_cycles_o
);
  logic [NW-1:0] cnt;

  assign neuron_o = cnt;
  assign tail_o   = busy_o && (cnt == NW'(N_NEURONS));
  assign step_o   = busy_o && !stall_i;
  assign done_o   = step_o && tail_o;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      busy_o         <= 1'b0;
      cnt            <= '0;
      stall_cycles_o <= '0;
    end else begin
      if (!busy_o) begin
        if (start_i) begin
          busy_o <= 1'b1;
          cnt    <= '0;
        end
      end else if (step_o) begin
        if (tail_o) busy_o <= 1'b0;
        else        cnt    <= cnt + 1'b1;
      end
      if (busy_o && stall_i) stall_cycles_o <= stall_cycles_o + 1;
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) busy_o |-> !start_i)
    else $error("sne_sequencer: start while busy");
endmodule
