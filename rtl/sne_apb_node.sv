// sne_apb_node: splits the accelerator's APB port among its register blocks.
//
// PADDR[13:12] selects the target: 0 the configuration registers, 1 .. N_DMA
// the register blocks of the DMAs. The select is forwarded to one target;
// PRDATA and PREADY come back from the selected target. An address that
// selects no target completes at once with PSLVERR and reads zero.
// The address split is this design's choice.
module sne_apb_node #(
  parameter int unsigned N_TGT = 3
) (
  input  logic             psel_i,
  input  logic [15:0]      paddr_i,
  output logic [31:0]      prdata_o,
  output logic             pready_o,
  output logic             pslverr_o,
  output logic [N_TGT-1:0] tgt_psel_o,
  input  logic [31:0]      tgt_prdata_i [N_TGT],
  input  logic [N_TGT-1:0] tgt_pready_i
);
  logic [1:0] sel;
  assign sel = paddr_i[13:12];

  always_comb begin
    tgt_psel_o = '0;
    prdata_o   = '0;
    pready_o   = 1'b1;
    pslverr_o  = 1'b0;
    if (int'(sel) < int'(N_TGT) && paddr_i[15:14] == 2'b00) begin
      tgt_psel_o[sel] = psel_i;
      prdata_o        = tgt_prdata_i[sel];
      pready_o        = tgt_pready_i[sel];
    end else begin
      pslverr_o = psel_i;
    end
  end
endmodule
