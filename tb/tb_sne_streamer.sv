// tb_sne_streamer: programs the DMA over its register port. First a 40-word
// memory->stream transfer of events (OP in the top bits of each word, moved
// into the control field), then of weights, both with random stream
// back-pressure and random memory latency; then the stream->memory
// direction, checking the words that land in memory.
module tb_sne_streamer;
  import sne_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0; logic [3:0] paddr = 0; logic [31:0] pwdata = 0, prdata; logic pready;
  logic req, gnt, we, rvalid; logic [31:0] addr, wdata, rdata;
  logic rd_valid, rd_ready, wr_valid, wr_ready, busy; stream_t rd_data, wr_data;
  always #5 clk = ~clk;
  sne_streamer dut (.clk_i(clk), .rst_ni(rst_n), .psel_i(psel), .penable_i(penable),
    .pwrite_i(pwrite), .paddr_i(paddr), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready),
    .mem_req_o(req), .mem_gnt_i(gnt), .mem_addr_o(addr), .mem_we_o(we), .mem_wdata_o(wdata),
    .mem_rdata_i(rdata), .mem_rvalid_i(rvalid), .rd_valid_o(rd_valid), .rd_ready_i(rd_ready),
    .rd_data_o(rd_data), .wr_valid_i(wr_valid), .wr_ready_o(wr_ready), .wr_data_i(wr_data), .busy_o(busy));
  sne_tb_mem #(.WORDS(1024)) u_mem (.clk_i(clk), .req_i(req), .gnt_o(gnt), .addr_i(addr),
    .we_i(we), .wdata_i(wdata), .rdata_o(rdata), .rvalid_o(rvalid));

  task automatic apb_write(logic [3:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask
  task automatic chk(bit c, string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int n_rx; int max_lat;
  stream_t rx [$];
  always @(posedge clk) begin
    if (rd_valid && rd_ready) rx.push_back(rd_data);
    rd_ready <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    rd_ready = 0; wr_valid = 0; wr_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) u_mem.mem[64 + i] = $urandom;
    // events: 40 words from byte address 0x100
    apb_write(4'h4, 32'h100); apb_write(4'h8, 40); apb_write(4'h0, 32'h1);
    wait (!busy); repeat (3) @(posedge clk);
    chk(rx.size() == 40, $sformatf("received %0d events", rx.size()));
    for (int i = 0; i < 40 && i < rx.size(); i++) begin
      logic [31:0] w;
      w = u_mem.mem[64 + i];
      chk(rx[i].kind == KIND_EVENT && rx[i].op == op_e'(w[31:30]) &&
          rx[i].data == {2'b00, w[29:0]}, $sformatf("event %0d", i));
    end
    rx.delete();
    // weights: 8 words, kind bit set, data unchanged
    apb_write(4'h4, 32'h100); apb_write(4'h8, 8); apb_write(4'h0, 32'h5);
    wait (!busy); repeat (3) @(posedge clk);
    chk(rx.size() == 8, "received 8 weight words");
    for (int i = 0; i < 8 && i < rx.size(); i++)
      chk(rx[i].kind == KIND_WEIGHT && rx[i].data == u_mem.mem[64 + i], $sformatf("weight %0d", i));
    @(negedge clk); paddr = 4'hC; #1; chk(prdata == 8, "DONE register");
    // stream -> memory: 20 events to byte address 0x800
    apb_write(4'h4, 32'h800); apb_write(4'h8, 20); apb_write(4'h0, 32'h3);
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      wr_valid = 1; wr_data = make_event(op_e'(i % 3), 8'(i), 8'(i * 3), 7'(i), 7'(i + 1));
      while (1) begin #1; if (wr_ready) break; @(negedge clk); end
      @(posedge clk);
    end
    @(negedge clk); wr_valid = 0;
    wait (!busy); repeat (3) @(posedge clk);
    for (int i = 0; i < 20; i++)
      chk(u_mem.mem[512 + i] == {2'(i % 3), 8'(i), 8'(i * 3), 7'(i), 7'(i + 1)}, $sformatf("written word %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
