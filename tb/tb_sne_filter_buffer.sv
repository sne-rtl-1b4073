// tb_sne_filter_buffer: loads all 256 3x3 kernels as a flat list of 4-bit
// weights packed eight per word, reads every set back through several read
// ports, then checks that clear rewinds the write pointer.
module tb_sne_filter_buffer;
  import sne_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, wr = 0; logic [31:0] wdata;
  logic [7:0] rd_set [4]; weight_t rd_w [4][9]; logic [8:0] loaded;
  int flat [256*9];
  always #5 clk = ~clk;
  sne_filter_buffer #(.N_RD(4)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .wr_i(wr),
    .wdata_i(wdata), .rd_set_i(rd_set), .rd_w_o(rd_w), .sets_loaded_o(loaded));
  initial begin
    foreach (flat[i]) flat[i] = $urandom_range(0, 15);
    foreach (rd_set[p]) rd_set[p] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int wd = 0; wd < 256 * 9 / 8; wd++) begin
      @(negedge clk); wr = 1;
      for (int i = 0; i < 8; i++) wdata[i*4 +: 4] = 4'(flat[wd*8 + i]);
    end
    @(negedge clk); wr = 0;
    checks++; if (loaded != 9'd256) begin failures++; $display("FAIL loaded %0d", loaded); end
    for (int s = 0; s < 256; s += 4) begin
      for (int p = 0; p < 4; p++) rd_set[p] = 8'(s + p);
      #1;
      for (int p = 0; p < 4; p++)
        for (int k = 0; k < 9; k++) begin
          checks++;
          if (rd_w[p][k] != weight_t'(flat[(s + p) * 9 + k])) begin
            failures++;
            if (failures < 10) $display("FAIL set %0d tap %0d got %0d", s + p, k, rd_w[p][k]);
          end
        end
    end
    // rewind and overwrite set 0
    @(negedge clk); clr = 1; @(negedge clk); clr = 0; wr = 1; wdata = 32'h7654_3210;
    @(negedge clk); wr = 0; rd_set[0] = 0; #1;
    for (int k = 0; k < 8; k++) begin
      checks++; if (rd_w[0][k] != weight_t'(k)) begin failures++; $display("FAIL rewind tap %0d", k); end
    end
    checks++; if (rd_w[0][8] != weight_t'(flat[8])) begin failures++; $display("FAIL tap 8 overwritten"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
