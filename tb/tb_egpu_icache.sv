// tb_egpu_icache: self-checking test of the instruction cache.
//
// A behavioural memory side answers line reads after a random delay with words
// computed from their address (word(a) = a * 2654435761 + 17). The test fetches
// random addresses from a working set larger than the cache, so that lines are
// evicted, and checks every fetched word, that a line request asks for the
// right aligned line and length, that a repeated fetch of a resident line hits
// (no line request, response one cycle after acceptance), that two addresses
// one cache size apart evict each other (direct mapping) and that flush
// invalidates everything.
module tb_egpu_icache;
  import egpu_pkg::*;
  localparam int SIZE = 256, LINE = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic flush = 0, req_valid = 0, req_ready, rsp_valid;
  logic [31:0] req_addr = '0, rsp_data;
  logic mreq_valid, mreq_ready = 0, mrsp_valid = 0;
  line_req_t mreq;
  line_data_t mrsp_data = '0;
  int n_lines = 0;

  egpu_icache #(.SIZE(SIZE), .LINE(LINE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .req_valid_i(req_valid),
    .req_ready_o(req_ready), .req_addr_i(req_addr), .rsp_valid_o(rsp_valid),
    .rsp_data_o(rsp_data), .mreq_valid_o(mreq_valid), .mreq_ready_i(mreq_ready),
    .mreq_o(mreq), .mrsp_valid_i(mrsp_valid), .mrsp_data_i(mrsp_data)
  );

  function automatic logic [31:0] mword(logic [31:0] a);
    return a * 32'd2654435761 + 32'd17;
  endfunction

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  // memory side
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
        n_lines++;
        chk("line aligned", r.addr & (LINE - 1), 0);
        chk("line length", 32'(r.nwords), LINE / 4);
        chk("line read", 32'(r.we), 0);
        repeat ($urandom_range(0, 6)) @(negedge clk);
        for (int w = 0; w < MEM_MAX_WORDS; w++) mrsp_data[w] = mword(r.addr + 4 * w);
        mrsp_valid = 1;
      end
    end
  end

  // one fetch; returns the cycles from acceptance to response
  task automatic fetch(logic [31:0] a, output int lat);
    @(negedge clk);
    req_valid = 1; req_addr = a;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    chk($sformatf("fetch %h", a), rsp_data, mword(a));
  endtask

  initial begin
    int lat, n0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [31:0] a;
      a = 32'h400 + 4 * $urandom_range(0, 3 * SIZE / 4 - 1);
      fetch(a, lat);
    end
    // hit: fetch the same line twice
    fetch(32'h1000, lat);
    n0 = n_lines;
    fetch(32'h1004, lat);
    chk("hit needs no line", n_lines, n0);
    chk("hit latency", lat, 1);
    // direct-mapped conflict
    fetch(32'h1000 + SIZE, lat);
    chk("conflict miss", n_lines, n0 + 1);
    fetch(32'h1008, lat);
    chk("evicted line refetched", n_lines, n0 + 2);
    // flush
    @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
    fetch(32'h100C, lat);
    chk("miss after flush", n_lines, n0 + 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
