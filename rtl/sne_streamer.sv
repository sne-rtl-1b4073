// sne_streamer: one DMA of the accelerator.
//
// Moves a linear block of 32-bit words between system memory and the event
// streams, in either direction (a 1D transfer, since events are stored one
// after another), and converts between the memory format of an event
// (OP in the top two bits of the word) and the stream format (OP in the
// control field). Weight words pass unchanged with the W kind bit set.
// A 16-word FIFO sits between the memory port and the stream port to absorb
// memory latency and contention.
//
// Register block (APB, 4 words, PREADY always high):
//   0x0 CTRL   write: bit0 start, bit1 dir (0 memory->stream, 1 stream->memory),
//              bit2 kind (0 events, 1 weights); read: {busy, kind, dir} in [2:0]
//              and busy also in bit 31
//   0x4 BASE   byte address of the first word
//   0x8 LEN    number of words
//   0xC DONE   words completed by the current or last transfer
// Memory port: request/grant with a separate read-valid, any number of
// cycles from grant to rvalid, in order. Reads are only issued while the
// FIFO has room for every outstanding reply.
// The register map and memory protocol are this design's choices; the 1D
// scheme, the format conversion and the 16-word FIFO follow the paper.
module sne_streamer
  import sne_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  // APB register port
  input  logic                psel_i,
  input  logic                penable_i,
  input  logic                pwrite_i,
  input  logic [3:0]          paddr_i,
  input  logic [31:0]         pwdata_i,
  output logic [31:0]         prdata_o,
  output logic                pready_o,
  // memory port
  output logic                mem_req_o,
  input  logic                mem_gnt_i,
  output logic [31:0]         mem_addr_o,
  output logic                mem_we_o,
  output logic [31:0]         mem_wdata_o,
  input  logic [31:0]         mem_rdata_i,
  input  logic                mem_rvalid_i,
  // stream from memory (source of the crossbar)
  output logic                rd_valid_o,
  input  logic                rd_ready_i,
  output stream_t             rd_data_o,
  // stream to memory (sink of the crossbar)
  input  logic                wr_valid_i,
  output logic                wr_ready_o,
  input  stream_t             wr_data_i,
  output logic                busy_o
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  logic        dir_q;    // 0: memory -> stream, 1: stream -> memory
  kind_e       kind_q;
  logic [31:0] base_q, len_q, addr_q, issued_q, done_q, accepted_q;
  logic [CW-1:0] outst_q;

  // ---------------------------------------------------------------- APB
  logic apb_wr;
  assign apb_wr   = psel_i && penable_i && pwrite_i;
  assign pready_o = 1'b1;
  always_comb begin
    unique case (paddr_i[3:2])
      2'd0:    prdata_o = {busy_o, 28'd0, kind_q, dir_q, busy_o} ;
      2'd1:    prdata_o = base_q;
      2'd2:    prdata_o = len_q;
      default: prdata_o = done_q;
    endcase
  end

  // ---------------------------------------------------------------- FIFO
  logic          f_in_valid, f_in_ready, f_out_valid, f_out_ready;
  logic [31:0]   f_in_data, f_out_data;
  logic [CW-1:0] f_count;

  sne_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk_i, .rst_ni,
    .in_valid(f_in_valid), .in_ready(f_in_ready), .in_data(f_in_data),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_data(f_out_data),
    .count(f_count)
  );

  logic rd_mode, wr_mode;
  assign rd_mode = busy_o && !dir_q;
  assign wr_mode = busy_o &&  dir_q;

  always_comb begin
    // memory side
    mem_addr_o  = addr_q;
    mem_wdata_o = f_out_data;
    mem_we_o    = wr_mode;
    mem_req_o   = 1'b0;
    if (rd_mode)
      mem_req_o = (issued_q < len_q) &&
                  ((CW+1)'(f_count) + (CW+1)'(outst_q) < (CW+1)'(FIFO_DEPTH));
    else if (wr_mode)
      mem_req_o = f_out_valid;
    // FIFO input
    f_in_valid = rd_mode ? mem_rvalid_i : (wr_mode && wr_valid_i && accepted_q < len_q);
    f_in_data  = rd_mode ? mem_rdata_i  : stream_to_mem(wr_data_i);
    wr_ready_o = wr_mode && f_in_ready && (accepted_q < len_q);
    // FIFO output
    rd_valid_o  = rd_mode && f_out_valid;
    rd_data_o   = mem_to_stream(f_out_data, kind_q);
    f_out_ready = rd_mode ? rd_ready_i : (wr_mode && mem_gnt_i);
  end

  // ---------------------------------------------------------------- control
  logic issue, rd_pop, wr_done;
  assign issue   = mem_req_o && mem_gnt_i;
  assign rd_pop  = rd_valid_o && rd_ready_i;
  assign wr_done = wr_mode && issue;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      busy_o     <= 1'b0;
      dir_q      <= 1'b0;
      kind_q     <= KIND_EVENT;
      base_q     <= '0;
      len_q      <= '0;
      addr_q     <= '0;
      issued_q   <= '0;
      done_q     <= '0;
      accepted_q <= '0;
      outst_q    <= '0;
    end else begin
      if (apb_wr && !busy_o) begin
        unique case (paddr_i[3:2])
          2'd0: begin
            dir_q  <= pwdata_i[1];
            kind_q <= kind_e'(pwdata_i[2]);
            if (pwdata_i[0]) begin
              busy_o     <= (len_q != '0);
              addr_q     <= base_q;
              issued_q   <= '0;
              done_q     <= '0;
              accepted_q <= '0;
            end
          end
          2'd1:    base_q <= pwdata_i;
          2'd2:    len_q  <= pwdata_i;
          default: ;
        endcase
      end
      if (issue) begin
        addr_q   <= addr_q + 32'd4;
        issued_q <= issued_q + 1;
      end
      if (rd_mode) outst_q <= outst_q + CW'(issue) - CW'(mem_rvalid_i);
      if (wr_valid_i && wr_ready_o) accepted_q <= accepted_q + 1;
      if (rd_pop || wr_done) begin
        done_q <= done_q + 1;
        if (done_q + 1 == len_q) busy_o <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   mem_rvalid_i && rd_mode |-> f_in_ready)
    else $error("sne_streamer: read reply with a full FIFO");
endmodule
