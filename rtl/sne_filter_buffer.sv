// sne_filter_buffer: weight store of one slice.
//
// Holds N_WSETS (256) kernels of K x K 4-bit signed weights. Weights arrive as
// 32-bit weight words of eight weights, W0 in bits [3:0]. They are written in
// order, filling set 0 tap 0..K*K-1, then set 1, and so on; a write pointer
// (set, tap) advances by eight weights per word and is cleared by clr_i. A
// word that runs past the last set is dropped from that point on.
//
// Every cluster reads its own set through an independent combinational read
// port (rd_set_i[c] -> rd_w_o[c]), so clusters of a slice may use different
// kernels for the same input event. The storage order, the pointer and the
// clear are this design's choices; the 256 selectable sets follow the paper.
module sne_filter_buffer
  import sne_pkg::*;
#(
  parameter int unsigned N_WSETS = 256,
  parameter int unsigned K       = 3,
  parameter int unsigned N_RD    = 16,
  parameter int unsigned SW      = $clog2(N_WSETS),
  parameter int unsigned KW      = $clog2(K * K)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 clr_i,
  input  logic                 wr_i,
  input  logic [EVT_BITS-1:0]  wdata_i,
  input  logic [CH_BITS-1:0]   rd_set_i [N_RD],
  output weight_t              rd_w_o   [N_RD][K*K],
  output logic [SW:0]          sets_loaded_o
);
  localparam int unsigned KK = K * K;

  weight_t       mem [N_WSETS][KK];
  logic [SW:0]   set_q;   // one extra bit: "buffer full"
  logic [KW-1:0] tap_q;

  // pointer after writing the eight weights of a word
  logic [SW:0]   set_n [W_PER_WORD+1];
  logic [KW-1:0] tap_n [W_PER_WORD+1];

  always_comb begin
    set_n[0] = set_q;
    tap_n[0] = tap_q;
    for (int i = 0; i < int'(W_PER_WORD); i++) begin
      if (set_n[i] == (SW+1)'(N_WSETS)) begin
        set_n[i+1] = set_n[i];
        tap_n[i+1] = tap_n[i];
      end else if (tap_n[i] == KW'(KK - 1)) begin
        set_n[i+1] = set_n[i] + 1'b1;
        tap_n[i+1] = '0;
      end else begin
        set_n[i+1] = set_n[i];
        tap_n[i+1] = tap_n[i] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni || clr_i) begin
      set_q <= '0;
      tap_q <= '0;
    end else if (wr_i) begin
      set_q <= set_n[W_PER_WORD];
      tap_q <= tap_n[W_PER_WORD];
    end
  end

  always_ff @(posedge clk_i) begin
    if (wr_i && !clr_i) begin
      for (int i = 0; i < int'(W_PER_WORD); i++) begin
        if (set_n[i] != (SW+1)'(N_WSETS))
          mem[SW'(set_n[i])][tap_n[i]] <= weight_t'(wdata_i[i*W_BITS +: W_BITS]);
      end
    end
  end

  for (genvar c = 0; c < int'(N_RD); c++) begin : g_rd
    for (genvar k = 0; k < int'(KK); k++) begin : g_tap
      assign rd_w_o[c][k] = mem[SW'(rd_set_i[c])][k];
    end
  end

  assign sets_loaded_o = set_q;
endmodule
