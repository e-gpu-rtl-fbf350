// tb_egpu_dcache_bank: self-checking test of one data cache bank.
//
// The bank is one of BANKS=4 (so it only ever sees line addresses whose bank
// bits are its own, here bank 1). A behavioural memory side serves line reads
// and word writes from a backing array after random delays. Random whole-line
// reads and byte-masked writes are checked against a reference copy of memory
// kept by the testbench. It checks that a read hit answers exactly LATENCY
// cycles after acceptance and makes no memory request, that a miss fetches the
// full aligned line, that every write reaches memory (write-through) with only
// its enabled words, that a write does not allocate a line, and that flush
// invalidates.
module tb_egpu_dcache_bank;
  import egpu_pkg::*;
  localparam int LINE = 32, BANKS = 4, SIZE = 256, LATENCY = 4, MW = 4096;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic flush = 0, req_valid = 0, req_ready, rsp_valid;
  line_req_t req = '0, mreq;
  line_data_t rsp_data, mrsp_data = '0;
  logic mreq_valid, mreq_ready = 0, mrsp_valid = 0, hit, miss;
  logic [31:0] backing [MW], refm [MW];
  int n_rd = 0, n_wr = 0, wr_words = 0, n_hit = 0, n_miss = 0;

  egpu_dcache_bank #(.SIZE(SIZE), .LINE(LINE), .BANKS(BANKS), .LATENCY(LATENCY)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .req_valid_i(req_valid),
    .req_ready_o(req_ready), .req_i(req), .rsp_valid_o(rsp_valid), .rsp_data_o(rsp_data),
    .mreq_valid_o(mreq_valid), .mreq_ready_i(mreq_ready), .mreq_o(mreq),
    .mrsp_valid_i(mrsp_valid), .mrsp_data_i(mrsp_data), .hit_o(hit), .miss_o(miss)
  );

  always @(posedge clk) if (rst_n) begin
    if (hit) n_hit++;
    if (miss) n_miss++;
  end

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    forever begin
      @(negedge clk);
      mrsp_valid = 0;
      if (mreq_valid) begin
        line_req_t r;
        r = mreq;
        mreq_ready = 1;
        @(negedge clk);
        mreq_ready = 0;
        chk("line aligned", r.addr & (LINE - 1), 0);
        repeat ($urandom_range(0, 5)) @(negedge clk);
        if (r.we) begin
          n_wr++;
          for (int w = 0; w < LINE / 4; w++)
            if (r.be[w] != 0) begin
              wr_words++;
              for (int b = 0; b < 4; b++)
                if (r.be[w][b]) backing[(r.addr >> 2) + w][8*b +: 8] = r.wdata[w][8*b +: 8];
            end
        end else begin
          n_rd++;
          chk("read length", 32'(r.nwords), LINE / 4);
          for (int w = 0; w < MEM_MAX_WORDS; w++)
            mrsp_data[w] = (w < LINE / 4) ? backing[(r.addr >> 2) + w] : 32'h0;
        end
        mrsp_valid = 1;
      end
    end
  end

  // line address in bank 1 from a line number
  function automatic logic [31:0] laddr(int n);
    return 32'((n * BANKS + 1) * LINE);
  endfunction

  task automatic access(line_req_t r, output int lat);
    @(negedge clk);
    req_valid = 1; req = r;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    if (!r.we)
      for (int w = 0; w < LINE / 4; w++)
        chk($sformatf("read %h word %0d", r.addr, w), rsp_data[w], refm[(r.addr >> 2) + w]);
  endtask

  initial begin
    int lat, rd0, wr0;
    line_req_t r;
    for (int i = 0; i < MW; i++) begin backing[i] = $urandom(); refm[i] = backing[i]; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      r = '0;
      r.addr = laddr($urandom_range(0, 15));   // twice the bank capacity
      r.nwords = 4'(LINE / 4);
      r.we = ($urandom_range(2) == 0);
      if (r.we) begin
        for (int w = 0; w < LINE / 4; w++) begin
          r.be[w] = ($urandom_range(1) == 1) ? 4'($urandom()) : 4'h0;
          r.wdata[w] = $urandom();
          for (int b = 0; b < 4; b++)
            if (r.be[w][b]) refm[(r.addr >> 2) + w][8*b +: 8] = r.wdata[w][8*b +: 8];
        end
      end
      wr0 = wr_words;
      access(r, lat);
      if (r.we) begin
        int exp_words;
        exp_words = 0;
        for (int w = 0; w < LINE / 4; w++) if (r.be[w] != 0) exp_words++;
        chk("write-through words", wr_words - wr0, exp_words);
      end
    end
    for (int i = 0; i < MW; i++) chk("memory after writes", backing[i], refm[i]);
    // hit timing
    r = '0; r.addr = laddr(3); r.nwords = 4'(LINE / 4);
    access(r, lat);
    rd0 = n_rd;
    access(r, lat);
    chk("hit latency", lat, LATENCY);
    chk("hit makes no request", n_rd, rd0);
    // a write does not allocate: write a line not present, then read it (miss)
    r = '0; r.addr = laddr(3 + SIZE / LINE); r.nwords = 4'(LINE / 4); r.we = 1;
    r.be[0] = 4'hF; r.wdata[0] = 32'h1234_5678;
    refm[r.addr >> 2] = 32'h1234_5678;
    access(r, lat);
    r.we = 0; r.be = '0;
    rd0 = n_rd;
    access(r, lat);
    chk("no write allocate", n_rd, rd0 + 1);
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    rd0 = n_rd;
    access(r, lat);
    chk("miss after flush", n_rd, rd0 + 1);
    checks++;
    if (n_hit == 0 || n_miss == 0) begin failures++; $display("FAIL hit/miss events"); end
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
