// sne_pkg: types and constants shared by the SNE (sparse neural engine) RTL.
//
// An event is one 32-bit word. The field order, left to right, follows the
// event data format of the design: OP | Time | CH | X_ADDR | Y_ADDR. The
// widths are this design's choice (only the 32-bit total is fixed): 2-bit
// operation, 8-bit time step, 8-bit channel (selects one of 256 weight sets),
// 7-bit X and 7-bit Y address (128 x 128 sensor).
//
// Inside the engine events and weights travel as a stream word: a control
// field (a kind bit E/W and the 2-bit OP) next to a 32-bit address/time field.
// For an event the two top data bits are unused and zero; for a weight word
// the data holds eight 4-bit weights W0..W7, W0 in the low nibble.
package sne_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned EVT_BITS   = 32;
  localparam int unsigned OP_BITS    = 2;
  localparam int unsigned TIME_BITS  = 8;
  localparam int unsigned CH_BITS    = 8;
  localparam int unsigned XY_BITS    = 7;
  localparam int unsigned W_BITS     = 4;   // synaptic weight
  localparam int unsigned STATE_BITS = 8;   // membrane potential
  localparam int unsigned W_PER_WORD = 8;   // weights in one 32-bit word
  localparam int unsigned LEAK_BITS  = TIME_BITS + STATE_BITS;

  // ---------------------------------------------------------------- types
  typedef enum logic [OP_BITS-1:0] {
    OP_RST    = 2'd0,  // reset the state of all neurons
    OP_UPDATE = 2'd1,  // integrate one input event
    OP_FIRE   = 2'd2,  // close the time step, fire above threshold
    OP_NOP    = 2'd3   // unused encoding, ignored by the slices
  } op_e;

  typedef struct packed {
    op_e                 op;
    logic [TIME_BITS-1:0] t;
    logic [CH_BITS-1:0]   ch;
    logic [XY_BITS-1:0]   x;
    logic [XY_BITS-1:0]   y;
  } event_t;  // memory format, 32 bits

  typedef enum logic { KIND_EVENT = 1'b0, KIND_WEIGHT = 1'b1 } kind_e;

  typedef struct packed {
    kind_e               kind;   // E (event) or W (weight)
    op_e                 op;     // event operation, unused for weights
    logic [EVT_BITS-1:0] data;   // {2'b0, t, ch, x, y} or {W7..W0}
  } stream_t;

  typedef logic signed [STATE_BITS-1:0] state_t;
  typedef logic signed [W_BITS-1:0]     weight_t;

  // Per-cluster mapping, one 32-bit register.
  typedef struct packed {
    logic [CH_BITS-1:0]  out_ch;  // channel written into output events
    logic [CH_BITS-1:0]  wset;    // weight-set offset added to the event CH
    logic                rsv1;
    logic [XY_BITS-1:0]  base_y;  // output tile origin
    logic                rsv0;
    logic [XY_BITS-1:0]  base_x;
  } cluster_cfg_t;

  // LIF parameters of a slice.
  typedef struct packed {
    logic [STATE_BITS-1:0] leak;  // L, subtracted once per time step
    state_t                vth;   // firing threshold
  } lif_cfg_t;

  // ---------------------------------------------------------------- helpers
  function automatic stream_t mem_to_stream(logic [EVT_BITS-1:0] w, kind_e k);
    stream_t s;
    s.kind = k;
    if (k == KIND_EVENT) begin
      s.op   = op_e'(w[EVT_BITS-1 -: OP_BITS]);
      s.data = {{OP_BITS{1'b0}}, w[EVT_BITS-OP_BITS-1:0]};
    end else begin
      s.op   = OP_NOP;
      s.data = w;
    end
    return s;
  endfunction

  function automatic logic [EVT_BITS-1:0] stream_to_mem(stream_t s);
    if (s.kind == KIND_EVENT) return {s.op, s.data[EVT_BITS-OP_BITS-1:0]};
    return s.data;
  endfunction

  function automatic stream_t make_event(op_e op, logic [TIME_BITS-1:0] t,
                                         logic [CH_BITS-1:0] ch,
                                         logic [XY_BITS-1:0] x,
                                         logic [XY_BITS-1:0] y);
    stream_t s;
    s.kind = KIND_EVENT;
    s.op   = op;
    s.data = {{OP_BITS{1'b0}}, t, ch, x, y};
    return s;
  endfunction

endpackage
