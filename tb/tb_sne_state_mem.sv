// tb_sne_state_mem: writes random words to random addresses of one state bank
// and reads them back against a shadow array.
module tb_sne_state_mem;
  import sne_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, re, we; logic [4:0] addr; state_t wdata, rdata;
  state_t shadow [32];
  always #5 clk = ~clk;
  sne_state_mem #(.DEPTH(32)) dut (.clk_i(clk), .re_i(re), .we_i(we), .addr_i(addr),
                                   .wdata_i(wdata), .rdata_o(rdata));
  initial begin
    re = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); we = 1; addr = 5'(i); wdata = state_t'($urandom); shadow[i] = wdata;
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 1) == 1) begin
        we = 1; re = 0; addr = 5'($urandom); wdata = state_t'($urandom); shadow[addr] = wdata;
      end else begin
        we = 0; re = 1; addr = 5'($urandom); #1;
        checks++;
        if (rdata !== shadow[addr]) begin
          failures++; $display("FAIL addr %0d got %0d exp %0d", addr, rdata, shadow[addr]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
