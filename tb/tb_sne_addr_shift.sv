// tb_sne_addr_shift: checks output position, in-field flag and kernel tap of
// the address shifter against direct arithmetic.
module tb_sne_addr_shift;
  import sne_pkg::*;
  int checks = 0, failures = 0;
  logic [XY_BITS-1:0] ev_x, ev_y, base_x, base_y, out_x, out_y;
  logic [5:0] neuron; logic in_field; logic [3:0] tap;
  sne_addr_shift dut (.*);
  initial begin
    for (int i = 0; i < 20000; i++) begin
      int ox, oy, kx, ky; bit f;
      base_x = 7'($urandom_range(0, 120)); base_y = 7'($urandom_range(0, 120));
      neuron = 6'($urandom);
      ox = int'(base_x) + int'(neuron) % 8; oy = int'(base_y) + int'(neuron) / 8;
      ev_x = 7'(ox + $urandom_range(0, 4) - 2); ev_y = 7'(oy + $urandom_range(0, 4) - 2);
      #1;
      kx = int'(ev_x) - ox + 1; ky = int'(ev_y) - oy + 1;
      f = (kx >= 0 && kx < 3 && ky >= 0 && ky < 3);
      checks++;
      if (in_field !== f || (f && int'(tap) != ky * 3 + kx) ||
          int'(out_x) != ox % 128 || int'(out_y) != oy % 128) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d ev(%0d,%0d) base(%0d,%0d): f=%0d tap=%0d o=(%0d,%0d)",
                                    neuron, ev_x, ev_y, base_x, base_y, in_field, tap, out_x, out_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
