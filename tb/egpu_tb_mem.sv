// egpu_tb_mem: behavioural model of the host main memory behind an OBI slave
// port, for the testbenches.
//
// WORDS 32-bit words starting at address 0. A request is granted in the same
// cycle with probability GNT_PCT percent (otherwise it waits, which exercises
// the hold-until-grant rule of OBI); the response (rvalid, rdata) follows one
// cycle after the grant. Writes honour the byte enables. Testbenches load and
// inspect the array mem directly. reads/writes count the transactions.
module egpu_tb_mem
  import egpu_pkg::*;
#(
  parameter int unsigned WORDS   = 16384,
  parameter int unsigned GNT_PCT = 70
) (
  input  logic     clk_i,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o
);

  logic [31:0] mem [WORDS];
  logic        gnt_rand = 1'b0;
  logic        rvalid_q = 1'b0;
  logic [31:0] rdata_q  = '0;
  int unsigned reads, writes;

  initial begin
    reads  = 0;
    writes = 0;
    for (int i = 0; i < WORDS; i++) mem[i] = 32'd0;
  end

  always @(negedge clk_i) gnt_rand = ($urandom_range(99) < GNT_PCT);
  assign rsp_o.gnt    = req_i.req && gnt_rand;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;

  always @(posedge clk_i) begin
    rvalid_q <= 1'b0;
    if (req_i.req && gnt_rand) begin
      int unsigned w;
      w = (req_i.addr >> 2) % WORDS;
      rvalid_q <= 1'b1;
      if (req_i.we) begin
        writes++;
        for (int b = 0; b < 4; b++)
          if (req_i.be[b]) mem[w][8*b +: 8] <= req_i.wdata[8*b +: 8];
        rdata_q <= 32'd0;
      end else begin
        reads++;
        rdata_q <= mem[w];
      end
    end
  end

endmodule
