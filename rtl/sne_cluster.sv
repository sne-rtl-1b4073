// sne_cluster: one time-multiplexed group of LIF neurons.
//
// A cluster has a single combinational LIF datapath shared by N_NEURONS
// neurons (64 in the design) that form a TILE_W x (N_NEURONS/TILE_W) tile of
// one output channel. The slice's sequencer steps every cluster through the
// same neuron address n; the address shifter turns n into an absolute output
// position and a kernel tap, and the datapath updates neuron n in that cycle.
//
// State storage is split over two single-port banks (even / odd neurons).
// In the cycle neuron n is read from bank n%2 and evaluated, the result is
// registered; in the next cycle it is written back to bank n%2 while neuron
// n+1 is read from the other bank. This double buffering gives one update
// per cycle without a dual-ported memory.
//
// A time-of-last-update (TLU) register holds the time step of the last
// operation the cluster took part in. At the start of an operation for time
// t the leak of all skipped steps, (t - TLU) * L, is applied to each neuron
// during the sweep, and TLU becomes t; time steps without activity cost
// nothing.
//
// Operations (latched from the slice at start_i):
//   RST    : all neurons written to zero, TLU = t.
//   UPDATE : only if the address filter hits (otherwise the cluster stays
//            idle, standing in for clock gating); neurons in the receptive
//            field add their weight, all neurons take the pending leak.
//            A neuron needing neither is not written.
//   FIRE   : every neuron above threshold pushes an output event
//            {UPDATE, t, out_ch, x, y} into the output FIFO and restarts at 0;
//            in the tail cycle a FIRE marker {FIRE, t} closes the time step.
// fifo_full_o asks the slice to stall the sequencer.
//
// The weights of the selected set (event CH + the cluster's set offset) are
// captured at start_i, so the filter buffer is read once per event.
// TLU, tiling, the marker and the stall are this design's choices; the
// datapath, the two banks, the TDM sweep and the FIFO follow the paper.
module sne_cluster
  import sne_pkg::*;
#(
  parameter int unsigned N_NEURONS  = 64,
  parameter int unsigned TILE_W     = 8,
  parameter int unsigned K          = 3,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned NW         = $clog2(N_NEURONS + 1),
  parameter int unsigned KW         = $clog2(K * K)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  cluster_cfg_t         cfg_i,
  input  lif_cfg_t             lif_i,
  // operation from the decoder
  input  logic                 start_i,
  input  stream_t              ev_i,
  output logic [CH_BITS-1:0]   wset_o,     // weight set wanted for ev_i
  input  weight_t              weights_i [K*K],
  // sequencer
  input  logic                 step_i,
  input  logic [NW-1:0]        neuron_i,
  input  logic                 tail_i,
  output logic                 fifo_full_o,
  // output events
  output logic                 out_valid_o,
  input  logic                 out_ready_i,
  output stream_t              out_data_o,
  // activity, for counters
  output logic                 active_o,
  output logic                 sop_o
);
  localparam int unsigned BD = N_NEURONS / 2;
  localparam int unsigned BW = (BD > 1) ? $clog2(BD) : 1;

  // ------------------------------------------------------------ operation
  op_e                   op_q;
  logic [TIME_BITS-1:0]  t_q, tlu_q;
  logic [XY_BITS-1:0]    x_q, y_q;
  logic                  active_q;
  logic [LEAK_BITS-1:0]  leak_q;
  weight_t               w_q [K*K];
  logic                  hit;

  event_t ev_fields;
  assign ev_fields = event_t'({ev_i.op, ev_i.data[EVT_BITS-OP_BITS-1:0]});
  assign wset_o    = ev_fields.ch + cfg_i.wset;

  sne_addr_filter #(.K(K), .TILE_W(TILE_W), .TILE_H(N_NEURONS / TILE_W)) u_filter (
    .ev_x(ev_fields.x), .ev_y(ev_fields.y),
    .base_x(cfg_i.base_x), .base_y(cfg_i.base_y), .hit(hit)
  );

  logic [TIME_BITS-1:0] dt;
  assign dt = (ev_fields.t > tlu_q) ? ev_fields.t - tlu_q : '0;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      op_q     <= OP_NOP;
      t_q      <= '0;
      tlu_q    <= '0;
      x_q      <= '0;
      y_q      <= '0;
      active_q <= 1'b0;
      leak_q   <= '0;
      for (int i = 0; i < int'(K * K); i++) w_q[i] <= '0;
    end else if (start_i) begin
      op_q     <= ev_i.op;
      t_q      <= ev_fields.t;
      x_q      <= ev_fields.x;
      y_q      <= ev_fields.y;
      leak_q   <= LEAK_BITS'(dt) * LEAK_BITS'(lif_i.leak);
      w_q      <= weights_i;
      unique case (ev_i.op)
        OP_RST:    begin active_q <= 1'b1; tlu_q <= ev_fields.t; end
        OP_UPDATE: begin
          active_q <= hit;
          if (hit && dt != '0) tlu_q <= ev_fields.t;
        end
        OP_FIRE:   begin
          active_q <= 1'b1;
          if (dt != '0) tlu_q <= ev_fields.t;
        end
        default:   active_q <= 1'b0;
      endcase
    end
  end

  // ------------------------------------------------------------ neuron sweep
  logic               in_field;
  logic [KW-1:0]      tap;
  logic [XY_BITS-1:0] out_x, out_y;
  logic [NW-2:0]      n_rel;  // neuron address without the tail bit

  assign n_rel = neuron_i[NW-2:0];

  sne_addr_shift #(.K(K), .TILE_W(TILE_W), .NW(NW-1)) u_shift (
    .ev_x(x_q), .ev_y(y_q), .base_x(cfg_i.base_x), .base_y(cfg_i.base_y),
    .neuron(n_rel), .in_field(in_field), .tap(tap), .out_x(out_x), .out_y(out_y)
  );

  logic    visit, bank_sel;
  logic    re [2];
  logic    we [2];
  state_t  rdata [2];
  state_t  v_in, v_out;
  logic    spike, w_en, need_write;

  assign visit    = step_i && !tail_i && active_q;
  assign bank_sel = n_rel[0];
  assign v_in     = rdata[bank_sel];
  assign w_en     = (op_q == OP_UPDATE) && in_field;

  sne_lif_datapath u_lif (
    .op(op_q), .v_in(v_in), .w(w_q[tap]), .w_en(w_en), .leak_total(leak_q),
    .vth(lif_i.vth), .v_out(v_out), .spike(spike)
  );

  assign need_write = (op_q != OP_UPDATE) || in_field || (leak_q != '0);

  // write-back register: the result of neuron n is stored one cycle later
  logic           wb_valid, wb_bank;
  logic [BW-1:0]  wb_idx;
  state_t         wb_data;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      wb_valid <= 1'b0;
      wb_bank  <= 1'b0;
      wb_idx   <= '0;
      wb_data  <= '0;
    end else begin
      wb_valid <= visit && need_write;
      wb_bank  <= bank_sel;
      wb_idx   <= BW'(n_rel >> 1);
      wb_data  <= v_out;
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    assign re[b] = visit && (bank_sel == 1'(b));
    assign we[b] = wb_valid && (wb_bank == 1'(b));
    sne_state_mem #(.DEPTH(BD)) u_mem (
      .clk_i(clk_i), .re_i(re[b]), .we_i(we[b]),
      .addr_i(we[b] ? wb_idx : BW'(n_rel >> 1)),
      .wdata_i(wb_data), .rdata_o(rdata[b])
    );
  end

  // ------------------------------------------------------------ output FIFO
  logic    push, fifo_ready;
  stream_t push_data;

  always_comb begin
    push      = 1'b0;
    push_data = make_event(OP_UPDATE, t_q, cfg_i.out_ch, out_x, out_y);
    if (step_i && active_q && op_q == OP_FIRE) begin
      if (tail_i) begin
        push      = 1'b1;
        push_data = make_event(OP_FIRE, t_q, '0, '0, '0);
      end else begin
        push = spike;
      end
    end
  end

  sne_fifo #(.WIDTH($bits(stream_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk_i(clk_i), .rst_ni(rst_ni),
    .in_valid(push), .in_ready(fifo_ready), .in_data(push_data),
    .out_valid(out_valid_o), .out_ready(out_ready_i), .out_data(out_data_o),
    .count()
  );

  assign fifo_full_o = !fifo_ready;
  assign active_o    = active_q;
  assign sop_o       = visit && w_en;

  for (genvar b = 0; b < 2; b++) begin : g_port_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) !(re[b] && we[b]))
      else $error("sne_cluster: bank %0d read and written in the same cycle", b);
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) push |-> fifo_ready)
    else $error("sne_cluster: push into a full FIFO");
endmodule
