// tb_sne_addr_filter: compares the receptive-field hit against a brute-force
// search over all 64 neurons of an 8x8 tile with a 3x3 window.
module tb_sne_addr_filter;
  import sne_pkg::*;
  int checks = 0, failures = 0;
  logic [XY_BITS-1:0] ev_x, ev_y, base_x, base_y; logic hit;
  sne_addr_filter dut (.*);
  initial begin
    for (int i = 0; i < 20000; i++) begin
      bit exp;
      base_x = 7'($urandom_range(0, 120)); base_y = 7'($urandom_range(0, 120));
      ev_x = (i % 2) ? 7'(int'(base_x) + $urandom_range(0, 11) - 2) : 7'($urandom);
      ev_y = (i % 2) ? 7'(int'(base_y) + $urandom_range(0, 11) - 2) : 7'($urandom);
      #1;
      exp = 0;
      for (int n = 0; n < 64; n++) begin
        int ox, oy;
        ox = int'(base_x) + n % 8; oy = int'(base_y) + n / 8;
        if (int'(ev_x) - ox <= 1 && ox - int'(ev_x) <= 1 &&
            int'(ev_y) - oy <= 1 && oy - int'(ev_y) <= 1) exp = 1;
      end
      checks++;
      if (hit !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL ev (%0d,%0d) base (%0d,%0d) hit %0d exp %0d", ev_x, ev_y, base_x, base_y, hit, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
