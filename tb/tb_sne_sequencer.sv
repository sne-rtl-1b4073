// tb_sne_sequencer: checks the address sweep 0..63 plus tail, the cycle count
// of one sweep (65 steps after the start cycle) and that a stall holds the
// address and is counted.
module tb_sne_sequencer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, stall = 0, busy, step, tail, done;
  logic [6:0] neuron; logic [31:0] stalls;
  always #5 clk = ~clk;
  sne_sequencer dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .stall_i(stall),
                     .busy_o(busy), .step_o(step), .neuron_o(neuron), .tail_o(tail),
                     .done_o(done), .stall_cycles_o(stalls));
  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    int cyc, expn, nstall;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1; expn = 0; nstall = 0;
      while (1) begin
        stall = (run == 1) && ($urandom_range(0, 3) == 0);
        #1;
        if (step) begin
          chk(int'(neuron) == expn, $sformatf("address %0d exp %0d", neuron, expn));
          chk(tail == (expn == 64), "tail flag");
          expn++;
        end else nstall++;
        if (done) break;
        @(negedge clk); cyc++;
      end
      chk(expn == 65, "65 steps");
      chk(cyc == 65 + nstall, $sformatf("sweep took %0d cycles with %0d stalls", cyc, nstall));
      @(negedge clk); stall = 0;
      chk(!busy, "idle after done");
    end
    chk(int'(stalls) > 0, "stalls counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
