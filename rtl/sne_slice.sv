// sne_slice: one independent processing engine (SL) of the accelerator.
//
// A slice holds N_CLUSTERS clusters (16 in the design) of N_NEURONS TDM
// neurons each, plus what they share: the decoder that takes stream words
// from the crossbar, the sequencer that steps all clusters through the same
// neuron address, the filter buffer with 256 weight sets, the LIF parameters
// and a collector that merges the clusters' output FIFOs into the slice's
// output stream.
//
// Every cluster sees the same input event. Each cluster has its own mapping
// register (tile origin, weight-set offset, output channel): its address
// filter decides whether it takes part in an UPDATE, its address shifter
// turns the shared neuron address into an absolute output position. RST and
// FIRE activate all clusters.
//
// Timing: an operation takes 1 + N_NEURONS + 1 cycles (66 at the defaults);
// a weight word takes one cycle. During FIRE the sequencer stalls while any
// cluster's output FIFO is full. Counters: synaptic operations (neuron
// updates that added a weight) and stall cycles.
module sne_slice
  import sne_pkg::*;
#(
  parameter int unsigned N_CLUSTERS = 16,
  parameter int unsigned N_NEURONS  = 64,
  parameter int unsigned TILE_W     = 8,
  parameter int unsigned K          = 3,
  parameter int unsigned N_WSETS    = 256,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  lif_cfg_t      lif_i,
  input  cluster_cfg_t  cl_cfg_i [N_CLUSTERS],
  input  logic          wclr_i,
  input  logic          in_valid_i,
  output logic          in_ready_o,
  input  stream_t       in_data_i,
  output logic          out_valid_o,
  input  logic          out_ready_i,
  output stream_t       out_data_o,
  output logic [31:0]   sop_cnt_o,
  output logic [31:0]   stall_cnt_o,
  output logic [31:0]   upd_cnt_o
);
  localparam int unsigned NW = $clog2(N_NEURONS + 1);
  localparam int unsigned KK = K * K;

  logic    start, wr_w, seq_busy, step, tail, done;
  stream_t ev;
  logic [NW-1:0] neuron;

  sne_decoder u_dec (
    .clk_i, .rst_ni, .in_valid_i, .in_ready_o, .in_data_i,
    .seq_busy_i(seq_busy), .start_o(start), .ev_o(ev), .wr_w_o(wr_w),
    .cnt_rst_o(), .cnt_update_o(upd_cnt_o), .cnt_fire_o(), .cnt_weight_o()
  );

  // current operation, for the stall rule
  op_e op_q;
  always_ff @(posedge clk_i) begin
    if (!rst_ni)    op_q <= OP_NOP;
    else if (start) op_q <= ev.op;
  end

  logic [N_CLUSTERS-1:0] full;
  logic                  stall;
  assign stall = (op_q == OP_FIRE) && (|full);

  sne_sequencer #(.N_NEURONS(N_NEURONS)) u_seq (
    .clk_i, .rst_ni, .start_i(start), .stall_i(stall), .busy_o(seq_busy),
    .step_o(step), .neuron_o(neuron), .tail_o(tail), .done_o(done),
    .stall_cycles_o(stall_cnt_o)
  );

  logic [CH_BITS-1:0] wset [N_CLUSTERS];
  weight_t            wts  [N_CLUSTERS][KK];

  sne_filter_buffer #(.N_WSETS(N_WSETS), .K(K), .N_RD(N_CLUSTERS)) u_fbuf (
    .clk_i, .rst_ni, .clr_i(wclr_i), .wr_i(wr_w), .wdata_i(ev.data),
    .rd_set_i(wset), .rd_w_o(wts), .sets_loaded_o()
  );

  logic [N_CLUSTERS-1:0] c_valid, c_ready, c_sop;
  stream_t               c_data [N_CLUSTERS];

  for (genvar c = 0; c < int'(N_CLUSTERS); c++) begin : g_cl
    sne_cluster #(.N_NEURONS(N_NEURONS), .TILE_W(TILE_W), .K(K),
                  .FIFO_DEPTH(FIFO_DEPTH)) u_cl (
      .clk_i, .rst_ni, .cfg_i(cl_cfg_i[c]), .lif_i(lif_i),
      .start_i(start), .ev_i(ev), .wset_o(wset[c]), .weights_i(wts[c]),
      .step_i(step), .neuron_i(neuron), .tail_i(tail), .fifo_full_o(full[c]),
      .out_valid_o(c_valid[c]), .out_ready_i(c_ready[c]), .out_data_o(c_data[c]),
      .active_o(), .sop_o(c_sop[c])
    );
  end

  sne_collector #(.N_IN(N_CLUSTERS)) u_coll (
    .clk_i, .rst_ni, .en_i('1), .align_i(1'b1), .in_ok_i('1), .in_valid_i(c_valid), .in_ready_o(c_ready),
    .in_data_i(c_data), .out_valid_o, .out_ready_i, .out_data_o,
    .out_src_o(), .fire_merged_o()
  );

  always_ff @(posedge clk_i) begin
    if (!rst_ni) sop_cnt_o <= '0;
    else         sop_cnt_o <= sop_cnt_o + 32'($countones(c_sop));
  end

  logic unused;
  assign unused = done;
endmodule
