// sne_state_mem: one neuron-state bank of a cluster.
//
// A cluster keeps its membrane potentials in two of these banks, even neurons
// in one and odd neurons in the other. The bank has a single port: in any
// cycle it is either read (combinationally, rdata follows addr) or written
// (at the clock edge). The cluster reads one bank while it writes back the
// previous neuron's result to the other, so each bank sees one access per
// cycle and the cluster completes one neuron update per cycle.
//
// The silicon uses latch-based memories; here the bank is a flip-flop array
// with the same one-access-per-cycle behaviour. Contents are not reset: the
// RST operation clears the neurons by writing zero to each of them.
module sne_state_mem
  import sne_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk_i,
  input  logic          re_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  state_t        wdata_i,
  output state_t        rdata_o
);
  state_t mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (we_i) mem[addr_i] <= wdata_i;
  end

  assign rdata_o = mem[addr_i];

  // re_i only documents the single-port use; the owner checks that a bank
  // is never read and written in the same cycle
  logic unused_re;
  assign unused_re = re_i;
endmodule
