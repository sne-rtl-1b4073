// tb_sne_conf_regs: writes every register of the map with random values
// through APB, checks the decoded outputs and the read-back, and the
// one-cycle weight-pointer clear pulse.
module tb_sne_conf_regs;
  import sne_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, psel = 0, penable = 0, pwrite = 0, pready;
  logic [11:0] paddr = 0; logic [31:0] pwdata = 0, prdata;
  logic [9:0] route [3]; logic [7:0] coll_en, wclr; lif_cfg_t lif [8]; cluster_cfg_t cl [8][16];
  logic pipe; logic [9:0] slr [8]; logic [31:0] sv [8];
  always #5 clk = ~clk;
  sne_conf_regs dut (.clk_i(clk), .rst_ni(rst_n), .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite),
    .paddr_i(paddr), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready), .route_o(route),
    .coll_en_o(coll_en), .pipe_o(pipe), .sl_route_o(slr), .lif_o(lif), .wclr_o(wclr), .cl_cfg_o(cl));
  task automatic apb_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask
  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask
  logic [31:0] rv [3]; logic [31:0] cv [8][16]; logic [15:0] lv [8];
  int pulses = 0;
  always @(posedge clk) if (rst_n && wclr != 0) pulses++;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 3; s++) begin rv[s] = $urandom; apb_write(12'(4 * s), rv[s]); end
    apb_write(12'h040, 32'h0000_00A5);
    apb_write(12'h044, 32'h0000_0003);
    for (int k = 0; k < 8; k++) begin sv[k] = $urandom; apb_write(12'(12'h080 + 4 * k), sv[k]); end
    for (int k = 0; k < 8; k++) begin
      lv[k] = 16'($urandom); apb_write(12'(12'h400 + 12'h80 * k), 32'(lv[k]));
      for (int c = 0; c < 16; c++) begin
        cv[k][c] = $urandom; apb_write(12'(12'h440 + 12'h80 * k + 4 * c), cv[k][c]);
      end
    end
    for (int s = 0; s < 3; s++) chk(route[s] == rv[s][9:0], "route");
    chk(coll_en == 8'hA5, "collector mask");
    chk(pipe == 1'b1, "pipelined mode bit");
    for (int k = 0; k < 8; k++) chk(slr[k] == sv[k][9:0], $sformatf("slice %0d route", k));
    for (int s = 0; s < 3; s++) chk(route[s] == rv[s][9:0], "source routes not disturbed by slice routes");
    for (int k = 0; k < 8; k++) begin
      chk(lif[k] == lv[k], "lif");
      for (int c = 0; c < 16; c++) chk(cl[k][c] == cv[k][c], $sformatf("cluster %0d/%0d", k, c));
    end
    // read back
    for (int k = 0; k < 8; k++) begin
      @(negedge clk); paddr = 12'(12'h440 + 12'h80 * k + 4 * 5); #1; chk(prdata == cv[k][5], "readback cluster");
      paddr = 12'(12'h400 + 12'h80 * k); #1; chk(prdata == 32'(lv[k]), "readback lif");
    end
    // weight-pointer clear: exactly one pulse on slice 3
    apb_write(12'h404 + 12'h180, 0);
    repeat (4) @(negedge clk);
    chk(pulses == 1, $sformatf("clear pulses %0d", pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n && wclr != 0) chk(wclr == 8'b0000_1000, $sformatf("clear on slice 3 only: %b at %0t", wclr, $time));
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
