// sne_top: the SNE sparse event-driven convolution accelerator.
//
// N_SLICES slices (8) of 16 clusters x 64 time-multiplexed LIF neurons, i.e.
// 8192 neurons, are fed through a stream crossbar. Two DMAs move events and
// weights between system memory and the crossbar; the slices' output events
// are merged by the top collector, which is itself a crossbar source, so
// they can go back to memory through a DMA or to another slice.
//
//   memory <-> DMA0, DMA1 <-> C-XBAR <-> slices -> collector -> C-XBAR
//   APB -> APB node -> configuration registers, DMA0 registers, DMA1 registers
//
// Crossbar sources: 0 .. N_DMA-1 the DMAs (memory -> stream), N_DMA the
// collector. Crossbar sinks: 0 .. N_SLICES-1 the slices, then the DMAs
// (stream -> memory). Software programs a destination mask per source.
//
// Layer-pipelined mode (configuration bit): each slice runs one layer and
// its output goes straight to the slice of the next layer. The collector then
// forwards every slice's words, FIRE markers included, on their own, and the
// crossbar routes each word by the slice it came from (one destination mask
// per slice). A slice's word is only chosen while every slice it is routed to
// is idle and is not being handed a word in that cycle; with that look-ahead a
// word waiting in the collector can never block a busy slice whose own output
// must drain first. This holds as long as the slices fed by the collector get
// no input from a DMA and the routes form no loop: the DMA feeds the first
// layer, the last layer goes to a DMA. The paper says only that collector
// events can be redirected to any slice in this mode; per-slice routing and
// the look-ahead are this design's way of doing it.
//
// APB: PADDR[13:12] = 0 configuration registers (see sne_conf_regs),
// 1 + d DMA d (see sne_streamer). One memory port per DMA, request/grant
// with in-order read-valid. A slice consumes an event in N_NEURONS + 2 cycles;
// all slices run concurrently.
module sne_top
  import sne_pkg::*;
#(
  parameter int unsigned N_SLICES   = 8,
  parameter int unsigned N_CLUSTERS = 16,
  parameter int unsigned N_NEURONS  = 64,
  parameter int unsigned N_WSETS    = 256,
  parameter int unsigned N_DMA      = 2,
  parameter int unsigned DMA_FIFO   = 16,
  parameter int unsigned CL_FIFO    = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // APB port
  input  logic        psel_i,
  input  logic        penable_i,
  input  logic        pwrite_i,
  input  logic [15:0] paddr_i,
  input  logic [31:0] pwdata_i,
  output logic [31:0] prdata_o,
  output logic        pready_o,
  output logic        pslverr_o,
  // memory ports, one per DMA
  output logic [N_DMA-1:0] mem_req_o,
  input  logic [N_DMA-1:0] mem_gnt_i,
  output logic [31:0]      mem_addr_o   [N_DMA],
  output logic [N_DMA-1:0] mem_we_o,
  output logic [31:0]      mem_wdata_o  [N_DMA],
  input  logic [31:0]      mem_rdata_i  [N_DMA],
  input  logic [N_DMA-1:0] mem_rvalid_i,
  // status
  output logic [N_DMA-1:0] dma_busy_o,
  output logic [31:0]      sop_cnt_o    [N_SLICES],
  output logic [31:0]      stall_cnt_o  [N_SLICES],
  output logic [31:0]      fire_cnt_o,
  output logic [31:0]      bcast_cnt_o
);
  localparam int unsigned N_SRC = N_DMA + 1;
  localparam int unsigned N_DST = N_SLICES + N_DMA;
  localparam int unsigned N_TGT = N_DMA + 1;

  // ---------------------------------------------------------------- APB
  logic [N_TGT-1:0] tgt_psel, tgt_pready;
  logic [31:0]      tgt_prdata [N_TGT];

  sne_apb_node #(.N_TGT(N_TGT)) u_apb (
    .psel_i, .paddr_i, .prdata_o, .pready_o, .pslverr_o,
    .tgt_psel_o(tgt_psel), .tgt_prdata_i(tgt_prdata), .tgt_pready_i(tgt_pready)
  );

  logic [N_DST-1:0]      route   [N_SRC];
  logic [N_DST-1:0]      sl_route [N_SLICES];
  logic                  pipe;
  logic [N_SLICES-1:0]   coll_en, wclr;
  lif_cfg_t              lif     [N_SLICES];
  cluster_cfg_t          cl_cfg  [N_SLICES][N_CLUSTERS];

  sne_conf_regs #(.N_SLICES(N_SLICES), .N_CLUSTERS(N_CLUSTERS),
                  .N_SRC(N_SRC), .N_DST(N_DST)) u_regs (
    .clk_i, .rst_ni, .psel_i(tgt_psel[0]), .penable_i, .pwrite_i,
    .paddr_i(paddr_i[11:0]), .pwdata_i, .prdata_o(tgt_prdata[0]),
    .pready_o(tgt_pready[0]), .route_o(route), .coll_en_o(coll_en),
    .pipe_o(pipe), .sl_route_o(sl_route),
    .lif_o(lif), .wclr_o(wclr), .cl_cfg_o(cl_cfg)
  );

  // ---------------------------------------------------------------- crossbar
  logic [N_SRC-1:0] src_valid, src_ready;
  stream_t          src_data [N_SRC];
  logic [N_DST-1:0] dst_valid, dst_ready;
  stream_t          dst_data [N_DST];

  localparam int unsigned SW = (N_SLICES > 1) ? $clog2(N_SLICES) : 1;
  logic [N_DST-1:0]    xroute [N_SRC];
  logic [SW-1:0]       coll_src;
  logic [N_DST-1:0]    handed;     // sinks taking the collector's word now
  logic [N_SLICES-1:0] coll_ok;

  // the collector's word is routed by its origin in layer-pipelined mode
  always_comb begin
    for (int s = 0; s < int'(N_DMA); s++) xroute[s] = route[s];
    xroute[N_DMA] = pipe ? sl_route[coll_src] : route[N_DMA];
  end

  // look-ahead for the collector: a slice's word may be chosen only while
  // every slice it goes to is idle and not being handed the current word
  assign handed = (src_valid[N_DMA] && src_ready[N_DMA]) ? xroute[N_DMA] : '0;
  always_comb begin
    for (int k = 0; k < int'(N_SLICES); k++) begin
      coll_ok[k] = 1'b1;
      for (int j = 0; j < int'(N_SLICES); j++)
        if (sl_route[k][j] && (!dst_ready[j] || handed[j])) coll_ok[k] = 1'b0;
    end
  end

  sne_xbar #(.N_SRC(N_SRC), .N_DST(N_DST)) u_xbar (
    .clk_i, .rst_ni, .route_i(xroute),
    .src_valid_i(src_valid), .src_ready_o(src_ready), .src_data_i(src_data),
    .dst_valid_o(dst_valid), .dst_ready_i(dst_ready), .dst_data_o(dst_data),
    .bcast_cnt_o
  );

  // ---------------------------------------------------------------- DMAs
  for (genvar d = 0; d < int'(N_DMA); d++) begin : g_dma
    sne_streamer #(.FIFO_DEPTH(DMA_FIFO)) u_dma (
      .clk_i, .rst_ni,
      .psel_i(tgt_psel[1+d]), .penable_i, .pwrite_i, .paddr_i(paddr_i[3:0]),
      .pwdata_i, .prdata_o(tgt_prdata[1+d]), .pready_o(tgt_pready[1+d]),
      .mem_req_o(mem_req_o[d]), .mem_gnt_i(mem_gnt_i[d]), .mem_addr_o(mem_addr_o[d]),
      .mem_we_o(mem_we_o[d]), .mem_wdata_o(mem_wdata_o[d]),
      .mem_rdata_i(mem_rdata_i[d]), .mem_rvalid_i(mem_rvalid_i[d]),
      .rd_valid_o(src_valid[d]), .rd_ready_i(src_ready[d]), .rd_data_o(src_data[d]),
      .wr_valid_i(dst_valid[N_SLICES+d]), .wr_ready_o(dst_ready[N_SLICES+d]),
      .wr_data_i(dst_data[N_SLICES+d]), .busy_o(dma_busy_o[d])
    );
  end

  // ---------------------------------------------------------------- slices
  logic [N_SLICES-1:0] sl_valid, sl_ready;
  stream_t             sl_data [N_SLICES];

  for (genvar k = 0; k < int'(N_SLICES); k++) begin : g_sl
    sne_slice #(.N_CLUSTERS(N_CLUSTERS), .N_NEURONS(N_NEURONS),
                .N_WSETS(N_WSETS), .FIFO_DEPTH(CL_FIFO)) u_sl (
      .clk_i, .rst_ni, .lif_i(lif[k]), .cl_cfg_i(cl_cfg[k]), .wclr_i(wclr[k]),
      .in_valid_i(dst_valid[k]), .in_ready_o(dst_ready[k]), .in_data_i(dst_data[k]),
      .out_valid_o(sl_valid[k]), .out_ready_i(sl_ready[k]), .out_data_o(sl_data[k]),
      .sop_cnt_o(sop_cnt_o[k]), .stall_cnt_o(stall_cnt_o[k]), .upd_cnt_o()
    );
  end

  // ---------------------------------------------------------------- collector
  sne_collector #(.N_IN(N_SLICES)) u_coll (
    .clk_i, .rst_ni, .en_i(coll_en), .align_i(!pipe), .in_ok_i(coll_ok),
    .in_valid_i(sl_valid), .in_ready_o(sl_ready), .in_data_i(sl_data),
    .out_valid_o(src_valid[N_DMA]), .out_ready_i(src_ready[N_DMA]),
    .out_data_o(src_data[N_DMA]), .out_src_o(coll_src), .fire_merged_o(fire_cnt_o)
  );
endmodule
