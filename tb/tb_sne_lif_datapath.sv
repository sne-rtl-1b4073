// tb_sne_lif_datapath: random and corner-case check of the LIF datapath
// against a plain integer model (linear decay toward zero, saturating
// accumulation, strict threshold, reset-to-zero on a spike).
module tb_sne_lif_datapath;
  import sne_pkg::*;
  int checks = 0, failures = 0;
  op_e op; state_t v_in, vth, v_out; weight_t w; logic w_en, spike;
  logic [LEAK_BITS-1:0] leak_total;

  sne_lif_datapath dut (.*);

  function automatic int decay(int v, int a);
    if (v > 0) return (v > a) ? v - a : 0;
    if (v < 0) return (-v > a) ? v + a : 0;
    return 0;
  endfunction

  task automatic check_one();
    int vl, exp_v, exp_s;
    #1;
    vl = decay(int'(v_in), int'(leak_total));
    exp_s = 0;
    case (op)
      OP_RST: exp_v = 0;
      OP_UPDATE: begin
        exp_v = vl + (w_en ? int'(w) : 0);
        if (exp_v > 127) exp_v = 127;
        if (exp_v < -128) exp_v = -128;
      end
      OP_FIRE: begin exp_s = (vl > int'(vth)); exp_v = exp_s ? 0 : vl; end
      default: exp_v = int'(v_in);
    endcase
    checks++;
    if (int'(v_out) != exp_v || int'(spike) != exp_s) begin
      failures++;
      if (failures < 10) $display("FAIL op=%s v=%0d w=%0d en=%0d L=%0d vth=%0d -> %0d/%0d exp %0d/%0d",
        op.name(), v_in, w, w_en, leak_total, vth, v_out, spike, exp_v, exp_s);
    end
  endtask

  initial begin
    // corners: saturation and exact threshold
    op = OP_UPDATE; v_in = 127; w = 7; w_en = 1; leak_total = 0; vth = 10; check_one();
    v_in = -128; w = -8; check_one();
    v_in = 5; w = 3; leak_total = 10; check_one();
    op = OP_FIRE; v_in = 10; leak_total = 0; vth = 10; check_one();
    v_in = 11; check_one();
    v_in = -20; leak_total = 300; check_one();
    op = OP_RST; v_in = 50; check_one();
    for (int i = 0; i < 20000; i++) begin
      op = op_e'($urandom_range(0, 3));
      v_in = state_t'($urandom); w = weight_t'($urandom); w_en = 1'($urandom);
      leak_total = ($urandom_range(0, 3) == 0) ? LEAK_BITS'($urandom) : LEAK_BITS'($urandom_range(0, 20));
      vth = state_t'($urandom);
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
