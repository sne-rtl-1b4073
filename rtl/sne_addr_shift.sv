// sne_addr_shift: maps the sequencer's neuron address to a kernel tap.
//
// All clusters of a slice step through the same relative neuron address n.
// The absolute output position is the cluster base plus the offset of n in
// the tile: ox = base_x + n % TILE_W, oy = base_y + n / TILE_W. The input
// event at (x, y) reaches that neuron through kernel tap
// (kx, ky) = (x - ox + R, y - oy + R), valid when both lie in [0, K-1];
// the tap index is ky * K + kx. Combinational. Tile layout and padding are
// this design's choices.
module sne_addr_shift
  import sne_pkg::*;
#(
  parameter int unsigned K      = 3,
  parameter int unsigned TILE_W = 8,
  parameter int unsigned NW     = 6,   // neuron address width
  parameter int unsigned KW     = $clog2(K * K)
) (
  input  logic [XY_BITS-1:0] ev_x,
  input  logic [XY_BITS-1:0] ev_y,
  input  logic [XY_BITS-1:0] base_x,
  input  logic [XY_BITS-1:0] base_y,
  input  logic [NW-1:0]      neuron,
  output logic               in_field,
  output logic [KW-1:0]      tap,
  output logic [XY_BITS-1:0] out_x,
  output logic [XY_BITS-1:0] out_y
);
  localparam int unsigned R  = (K - 1) / 2;
  localparam int unsigned CW = XY_BITS + 3;

  logic signed [CW-1:0] ox, oy, kx, ky;
  always_comb begin
    ox = $signed(CW'(base_x)) + $signed(CW'(neuron % NW'(TILE_W)));
    oy = $signed(CW'(base_y)) + $signed(CW'(neuron / NW'(TILE_W)));
    kx = $signed(CW'(ev_x)) - ox + $signed(CW'(R));
    ky = $signed(CW'(ev_y)) - oy + $signed(CW'(R));
    in_field = (kx >= 0) && (kx < $signed(CW'(K))) && (ky >= 0) && (ky < $signed(CW'(K)));
    tap   = in_field ? KW'(ky * $signed(CW'(K)) + kx) : '0;
    out_x = XY_BITS'(ox);
    out_y = XY_BITS'(oy);
  end
endmodule
