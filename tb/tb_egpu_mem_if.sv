// tb_egpu_mem_if: self-checking test of the memory interface.
//
// Three requesters (standing in for an instruction cache and two data cache
// banks) issue random line requests at the same time, each in its own address
// region: reads of 1 to 8 words and writes with random per-word byte enables.
// The OBI master port is connected to the behavioural host memory, which grants
// at random. Read lines are compared with a reference copy kept by the
// testbench, memory is compared with that copy at the end, the number of OBI
// transactions must equal the number of words each line needs (the line is
// serialized into 32-bit transfers, and words with no byte enabled are not
// written), and every requester must be served.
module tb_egpu_mem_if;
  import egpu_pkg::*;
  localparam int N = 3, REGION = 1024;   // words per requester region
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] mreq_valid = '0, mreq_ready, mrsp_valid;
  line_req_t [N-1:0] mreq = '0;
  line_data_t mrsp_data;
  obi_req_t obi_req;
  obi_rsp_t obi_rsp;
  logic [31:0] refm [N * REGION];

  egpu_mem_if #(.N(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mreq_valid_i(mreq_valid), .mreq_ready_o(mreq_ready),
    .mreq_i(mreq), .mrsp_valid_o(mrsp_valid), .mrsp_data_o(mrsp_data),
    .obi_req_o(obi_req), .obi_rsp_i(obi_rsp)
  );
  egpu_tb_mem #(.WORDS(N * REGION), .GNT_PCT(60)) u_mem (.clk_i(clk), .req_i(obi_req), .rsp_o(obi_rsp));

  int checks = 0, failures = 0;
  int exp_reads = 0, exp_writes = 0;
  int served [N];
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  task automatic requester(int id, int count);
    for (int n = 0; n < count; n++) begin
      line_req_t r;
      int base;
      r = '0;
      base = id * REGION + 8 * $urandom_range(0, REGION / 8 - 1);
      r.addr = 32'(base * 4);
      r.we = $urandom_range(1);
      r.nwords = 4'($urandom_range(1, 8));
      if (r.we) begin
        for (int w = 0; w < 8; w++) begin
          r.be[w] = ($urandom_range(2) != 0) ? 4'($urandom()) : 4'h0;
          r.wdata[w] = $urandom();
          if (r.be[w] != 0) exp_writes++;
          for (int b = 0; b < 4; b++)
            if (r.be[w][b]) refm[base + w][8*b +: 8] = r.wdata[w][8*b +: 8];
        end
      end else exp_reads += r.nwords;
      @(negedge clk);
      mreq[id] = r;
      mreq_valid[id] = 1;
      #1;
      while (!mreq_ready[id]) begin @(negedge clk); #1; end
      @(negedge clk);
      mreq_valid[id] = 0;
      mreq[id] = '0;
      while (!mrsp_valid[id]) @(negedge clk);
      served[id]++;
      if (!r.we)
        for (int w = 0; w < r.nwords; w++)
          chk($sformatf("req %0d read word %0d", id, w), mrsp_data[w], refm[base + w]);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
  endtask

  initial begin
    for (int i = 0; i < N * REGION; i++) begin
      refm[i] = $urandom();
      u_mem.mem[i] = refm[i];
    end
    for (int i = 0; i < N; i++) served[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      requester(0, 60);
      requester(1, 60);
      requester(2, 60);
    join
    repeat (5) @(negedge clk);
    for (int i = 0; i < N * REGION; i++) chk("memory", u_mem.mem[i], refm[i]);
    chk("OBI reads", u_mem.reads, exp_reads);
    chk("OBI writes", u_mem.writes, exp_writes);
    for (int i = 0; i < N; i++) chk($sformatf("requester %0d served", i), served[i], 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
