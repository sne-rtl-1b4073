// tb_sne_apb_node: sweeps the target-select bits and checks that only the
// addressed target is selected, that its read data and ready come back, and
// that unmapped addresses raise the slave error.
module tb_sne_apb_node;
  int checks = 0, failures = 0;
  logic psel; logic [15:0] paddr; logic [31:0] prdata; logic pready, pslverr;
  logic [2:0] tsel; logic [31:0] trd [3]; logic [2:0] trdy;
  sne_apb_node #(.N_TGT(3)) dut (.psel_i(psel), .paddr_i(paddr), .prdata_o(prdata),
    .pready_o(pready), .pslverr_o(pslverr), .tgt_psel_o(tsel), .tgt_prdata_i(trd), .tgt_pready_i(trdy));
  initial begin
    trd[0] = 32'hAAAA0000; trd[1] = 32'hBBBB1111; trd[2] = 32'hCCCC2222;
    for (int i = 0; i < 2000; i++) begin
      int t;
      psel = 1'($urandom); paddr = 16'($urandom); trdy = 3'($urandom); #1;
      t = paddr[15:12];
      checks++;
      if (t < 3) begin
        if (tsel != (psel ? 3'(1 << t) : 3'b0) || prdata != trd[t] || pready != trdy[t] || pslverr) begin
          failures++; $display("FAIL addr %h sel %b", paddr, tsel);
        end
      end else if (tsel != 0 || pslverr != psel || prdata != 0 || !pready) begin
        failures++; $display("FAIL unmapped %h", paddr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
