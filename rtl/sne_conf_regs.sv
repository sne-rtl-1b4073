// sne_conf_regs: configuration registers of the accelerator (APB slave).
//
// Word addresses inside the block (byte offsets):
//   0x000 + 4*s             route of crossbar source s: destination mask
//                           (bits 0..N_SLICES-1 slices, then the DMAs)
//   0x040                   collector input mask: slices whose output is merged
//   0x044                   bit 0: layer-pipelined mode. The collector then
//                           forwards each slice's words, FIRE included, on
//                           their own and routes them by the slice they came
//                           from, using the per-slice routes below instead of
//                           the route of the collector source
//   0x080 + 4*k             route of slice k's output in layer-pipelined
//                           mode: destination mask, same layout as above
//   0x400 + 0x80*k + 0x00   slice k LIF parameters: vth [7:0], leak [15:8]
//   0x400 + 0x80*k + 0x04   slice k: writing any value rewinds the weight
//                           write pointer of its filter buffer (one-cycle pulse)
//   0x400 + 0x80*k + 0x40 + 4*c   slice k, cluster c mapping:
//                           base_x [6:0], base_y [14:8], weight-set offset
//                           [23:16], output channel [31:24]
// Writes take effect in the APB access phase; PREADY is always high. All
// registers reset to zero. The register map is this design's own.
module sne_conf_regs
  import sne_pkg::*;
#(
  parameter int unsigned N_SLICES   = 8,
  parameter int unsigned N_CLUSTERS = 16,
  parameter int unsigned N_SRC      = 3,
  parameter int unsigned N_DST      = 10
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            psel_i,
  input  logic            penable_i,
  input  logic            pwrite_i,
  input  logic [11:0]     paddr_i,
  input  logic [31:0]     pwdata_i,
  output logic [31:0]     prdata_o,
  output logic            pready_o,
  output logic [N_DST-1:0]    route_o  [N_SRC],
  output logic [N_SLICES-1:0] coll_en_o,
  output logic            pipe_o,
  output logic [N_DST-1:0]    sl_route_o [N_SLICES],
  output lif_cfg_t        lif_o    [N_SLICES],
  output logic [N_SLICES-1:0] wclr_o,
  output cluster_cfg_t    cl_cfg_o [N_SLICES][N_CLUSTERS]
);
  localparam int unsigned SRCW = (N_SRC > 1) ? $clog2(N_SRC) : 1;
  localparam int unsigned SLW  = (N_SLICES > 1) ? $clog2(N_SLICES) : 1;
  logic       wr;
  logic [2:0] sl;     // slice index field
  logic [3:0] cl;     // cluster index field
  assign wr       = psel_i && penable_i && pwrite_i;
  assign pready_o = 1'b1;
  assign sl       = paddr_i[9:7];
  assign cl       = paddr_i[5:2];

  logic [3:0] slr;    // slice index of a per-slice route
  logic is_slice, is_lif, is_wclr, is_cl, is_slr;
  assign slr      = paddr_i[5:2];
  assign is_slr   = !paddr_i[10] && paddr_i[9:6] == 4'd2 && (int'(slr) < int'(N_SLICES));
  assign is_slice = paddr_i[10] && (int'(sl) < int'(N_SLICES));
  assign is_lif   = is_slice && paddr_i[6:2] == 5'd0;
  assign is_wclr  = is_slice && paddr_i[6:2] == 5'd1;
  assign is_cl    = is_slice && paddr_i[6] && (int'(cl) < int'(N_CLUSTERS));

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      for (int s = 0; s < int'(N_SRC); s++) route_o[s] <= '0;
      coll_en_o <= '0;
      pipe_o    <= 1'b0;
      for (int k = 0; k < int'(N_SLICES); k++) sl_route_o[k] <= '0;
      wclr_o    <= '0;
      for (int k = 0; k < int'(N_SLICES); k++) begin
        lif_o[k] <= '0;
        for (int c = 0; c < int'(N_CLUSTERS); c++) cl_cfg_o[k][c] <= '0;
      end
    end else begin
      wclr_o <= '0;
      if (wr) begin
        if (!paddr_i[10] && paddr_i[9:6] == 4'd0 && int'(paddr_i[5:2]) < int'(N_SRC))
          route_o[SRCW'(paddr_i[5:2])] <= pwdata_i[N_DST-1:0];
        if (paddr_i[10:2] == 9'h010) coll_en_o <= pwdata_i[N_SLICES-1:0];
        if (paddr_i[10:2] == 9'h011) pipe_o <= pwdata_i[0];
        if (is_slr) sl_route_o[SLW'(slr)] <= pwdata_i[N_DST-1:0];
        if (is_lif)  lif_o[sl] <= lif_cfg_t'(pwdata_i[15:0]);
        if (is_wclr) wclr_o[sl] <= 1'b1;
        if (is_cl)   cl_cfg_o[sl][cl] <= cluster_cfg_t'(pwdata_i);
      end
    end
  end

  always_comb begin
    prdata_o = '0;
    if (!paddr_i[10] && paddr_i[9:6] == 4'd0 && int'(paddr_i[5:2]) < int'(N_SRC))
      prdata_o = 32'(route_o[SRCW'(paddr_i[5:2])]);
    if (paddr_i[10:2] == 9'h010) prdata_o = 32'(coll_en_o);
    if (paddr_i[10:2] == 9'h011) prdata_o = 32'(pipe_o);
    if (is_slr) prdata_o = 32'(sl_route_o[SLW'(slr)]);
    if (is_lif) prdata_o = 32'(lif_o[sl]);
    if (is_cl)  prdata_o = cl_cfg_o[sl][cl];
  end
endmodule
