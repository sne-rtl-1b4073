// sne_lif_datapath: combinational leaky integrate-and-fire neuron update.
//
// One cluster evaluates one neuron per clock through this block. The state is
// an 8-bit signed membrane potential and the synaptic weight is 4-bit signed,
// as in the design. The leak is linear: a programmable amount L per elapsed
// time step. Because a cluster only visits its neurons when an operation
// reaches it, the pending leak arrives here already multiplied by the number
// of time steps since the last visit (leak_total = dt * L).
//
// Operations:
//   OP_RST    : v_out = 0.
//   OP_UPDATE : v_out = sat(leak(v_in) + w)   (w only when w_en).
//   OP_FIRE   : spike = leak(v_in) > vth; a neuron that fires restarts at 0.
//
// Design choices not fixed by the paper: the leak pulls the potential toward
// zero and stops there (a linear stand-in for exponential decay), the sum
// saturates at the 8-bit limits, "above the threshold" is a strict compare,
// and a neuron that fires is reset to zero.
module sne_lif_datapath
  import sne_pkg::*;
(
  input  op_e                   op,
  input  state_t                v_in,
  input  weight_t               w,
  input  logic                  w_en,
  input  logic [LEAK_BITS-1:0]  leak_total,
  input  state_t                vth,
  output state_t                v_out,
  output logic                  spike
);
  localparam int unsigned WIDE = LEAK_BITS + 2;

  logic signed [WIDE-1:0] v_wide, leak_wide, v_leaked, sum;
  state_t                 v_l;

  always_comb begin
    v_wide    = WIDE'(v_in);
    leak_wide = $signed({2'b00, leak_total});
    // linear decay toward zero
    if (v_wide > 0)      v_leaked = (v_wide > leak_wide)  ? v_wide - leak_wide : '0;
    else if (v_wide < 0) v_leaked = (-v_wide > leak_wide) ? v_wide + leak_wide : '0;
    else                 v_leaked = '0;
    v_l = state_t'(v_leaked);  // |v_leaked| <= |v_in|, fits

    sum = v_leaked + (w_en ? WIDE'(w) : '0);
    spike = 1'b0;
    unique case (op)
      OP_RST:    v_out = '0;
      OP_UPDATE: begin
        if (sum > WIDE'(127))       v_out = 8'sd127;
        else if (sum < -WIDE'(128)) v_out = -8'sd128;
        else                        v_out = state_t'(sum);
      end
      OP_FIRE: begin
        spike = (v_l > vth);
        v_out = spike ? '0 : v_l;
      end
      default:   v_out = v_in;
    endcase
  end
endmodule
