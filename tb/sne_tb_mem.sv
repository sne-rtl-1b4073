// sne_tb_mem: behavioural model of a system memory port for the testbenches.
// Request/grant with random grant delay, reads answered in order after a
// random latency of 1..LAT cycles. Word-addressed storage of WORDS words.
module sne_tb_mem #(
  parameter int WORDS = 4096,
  parameter int LAT   = 4
) (
  input  logic        clk_i,
  input  logic        req_i,
  output logic        gnt_o,
  input  logic [31:0] addr_i,
  input  logic        we_i,
  input  logic [31:0] wdata_i,
  output logic [31:0] rdata_o,
  output logic        rvalid_o
);
  logic [31:0] mem [WORDS];
  typedef struct { int due; logic [31:0] data; } rsp_t;
  rsp_t rsp [$];
  int   cyc = 0;
  logic gnt_en = 0;

  assign gnt_o = req_i && gnt_en;

  initial begin
    rvalid_o = 0;
    rdata_o  = 0;
    for (int i = 0; i < WORDS; i++) mem[i] = 0;
  end

  always @(posedge clk_i) begin
    cyc <= cyc + 1;
    rvalid_o <= 1'b0;
    if (rsp.size() > 0 && rsp[0].due <= cyc) begin
      rvalid_o <= 1'b1;
      rdata_o  <= rsp[0].data;
      void'(rsp.pop_front());
    end
    if (gnt_o) begin
      if (we_i) mem[addr_i[31:2] % WORDS] <= wdata_i;
      else begin
        rsp_t r;
        r.due  = cyc + $urandom_range(1, LAT);
        if (rsp.size() > 0 && r.due < rsp[rsp.size()-1].due) r.due = rsp[rsp.size()-1].due;
        r.data = mem[addr_i[31:2] % WORDS];
        rsp.push_back(r);
      end
    end
    gnt_en <= ($urandom_range(0, 3) != 0);
  end
endmodule
