// tb_sne_decoder: feeds weight words and events of every kind, with a busy
// sequencer model, and checks start/write pulses, back-pressure and the
// per-kind counters.
module tb_sne_decoder;
  import sne_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, busy = 0, start, wr_w;
  stream_t in_data, ev;
  logic [31:0] c_rst, c_upd, c_fire, c_w;
  always #5 clk = ~clk;
  sne_decoder dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
                   .in_data_i(in_data), .seq_busy_i(busy), .start_o(start), .ev_o(ev),
                   .wr_w_o(wr_w), .cnt_rst_o(c_rst), .cnt_update_o(c_upd),
                   .cnt_fire_o(c_fire), .cnt_weight_o(c_w));
  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask
  int n_rst = 0, n_upd = 0, n_fire = 0, n_w = 0;
  initial begin
    in_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      busy = ($urandom_range(0, 2) == 0);
      in_valid = 1;
      if ($urandom_range(0, 3) == 0) begin
        in_data.kind = KIND_WEIGHT; in_data.op = OP_NOP; in_data.data = $urandom;
      end else in_data = make_event(op_e'($urandom_range(0, 3)), 8'($urandom), 8'($urandom), 7'($urandom), 7'($urandom));
      #1;
      chk(in_ready == !busy, "ready follows the sequencer");
      chk(start == (!busy && in_data.kind == KIND_EVENT && in_data.op != OP_NOP), "start pulse");
      chk(wr_w == (!busy && in_data.kind == KIND_WEIGHT), "weight write");
      chk(ev == in_data, "event forwarded");
      if (!busy) begin
        if (in_data.kind == KIND_WEIGHT) n_w++;
        else case (in_data.op) OP_RST: n_rst++; OP_UPDATE: n_upd++; OP_FIRE: n_fire++; default: ; endcase
      end
    end
    @(negedge clk); in_valid = 0; @(negedge clk);
    chk(c_rst == n_rst && c_upd == n_upd && c_fire == n_fire && c_w == n_w, "counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
