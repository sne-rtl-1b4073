// sne_addr_filter: receptive-field test of one cluster.
//
// A cluster owns a TILE_W x TILE_H tile of output neurons whose top-left
// corner is (base_x, base_y). With a K x K kernel, stride 1 and "same"
// padding, an input event at (x, y) touches output neurons within
// R = (K-1)/2 of it. The event is for this cluster when that window overlaps
// the tile. Combinational. Clusters that miss are not activated for the
// update (they stand in for the clock-gated clusters of the design).
// Stride, padding and the tile shape are this design's choices.
module sne_addr_filter
  import sne_pkg::*;
#(
  parameter int unsigned K      = 3,
  parameter int unsigned TILE_W = 8,
  parameter int unsigned TILE_H = 8
) (
  input  logic [XY_BITS-1:0] ev_x,
  input  logic [XY_BITS-1:0] ev_y,
  input  logic [XY_BITS-1:0] base_x,
  input  logic [XY_BITS-1:0] base_y,
  output logic               hit
);
  localparam int unsigned R  = (K - 1) / 2;
  localparam int unsigned CW = XY_BITS + 2;

  logic [CW-1:0] ex, ey, bx, by;
  always_comb begin
    ex = CW'(ev_x);
    ey = CW'(ev_y);
    bx = CW'(base_x);
    by = CW'(base_y);
    hit = (ex + CW'(R) >= bx) && (ex <= bx + CW'(TILE_W - 1 + R)) &&
          (ey + CW'(R) >= by) && (ey <= by + CW'(TILE_H - 1 + R));
  end
endmodule
