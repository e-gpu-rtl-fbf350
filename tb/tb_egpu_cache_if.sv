// tb_egpu_cache_if: self-checking test of the data cache interface with two
// compute unit ports of 4 threads and two banks with 16-byte lines.
//
// Behavioural banks serve whole-line requests from a backing array after a
// random delay and check that every line they receive is aligned and belongs to
// them (line-interleaved banks). Each port issues random multi-thread loads and
// stores with random thread masks, in its own address region, both at once so
// that they collide on banks. Loaded words are compared with a reference copy
// (masked-off threads must read zero), stores update the reference in thread
// order (on a byte written by two threads the higher thread wins), and memory
// is compared at the end. A first phase with one port alone checks coalescing:
// four threads reading one line cost one bank access, four threads reading four
// lines cost four. Bank conflicts must have been seen.
module tb_egpu_cache_if;
  import egpu_pkg::*;
  localparam int NC = 2, T = 4, BANKS = 2, LINE = 16, REGION = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NC-1:0] req_valid = '0, req_ready, req_we = '0, rsp_valid;
  logic [NC-1:0][T-1:0] req_mask = '0;
  logic [NC-1:0][T-1:0][31:0] req_addr = '0, req_wdata = '0, rsp_data;
  logic [NC-1:0][T-1:0][3:0] req_be = '0;
  logic [BANKS-1:0] breq_valid, breq_ready = '0, brsp_valid = '0;
  line_req_t [BANKS-1:0] breq;
  line_data_t [BANKS-1:0] brsp_data = '0;
  logic conflict;
  logic [31:0] bmem [NC * REGION], refm [NC * REGION];
  int n_bank = 0, n_conf = 0;

  egpu_cache_if #(.NUM_CU(NC), .NUM_THREADS(T), .BANKS(BANKS), .LINE(LINE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_we_i(req_we), .req_mask_i(req_mask), .req_addr_i(req_addr), .req_be_i(req_be),
    .req_wdata_i(req_wdata), .rsp_valid_o(rsp_valid), .rsp_data_o(rsp_data),
    .breq_valid_o(breq_valid), .breq_ready_i(breq_ready), .breq_o(breq),
    .brsp_valid_i(brsp_valid), .brsp_data_i(brsp_data), .conflict_o(conflict)
  );

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  always @(posedge clk) if (rst_n && conflict) n_conf++;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    initial forever begin
      @(negedge clk);
      brsp_valid[b] = 0;
      if (breq_valid[b] && $urandom_range(3) != 0) begin
        line_req_t r;
        r = breq[b];
        breq_ready[b] = 1;
        @(negedge clk);
        breq_ready[b] = 0;
        n_bank++;
        chk("bank line aligned", r.addr % LINE, 0);
        chk("bank owns line", (r.addr / LINE) % BANKS, b);
        repeat ($urandom_range(0, 4)) @(negedge clk);
        for (int w = 0; w < LINE / 4; w++) begin
          int i;
          i = (r.addr >> 2) % (NC * REGION) + w;
          if (r.we) begin
            for (int k = 0; k < 4; k++)
              if (r.be[w][k]) bmem[i][8*k +: 8] = r.wdata[w][8*k +: 8];
          end else brsp_data[b][w] = bmem[i];
        end
        brsp_valid[b] = 1;
      end
    end
  end

  // one request from port c; addr_mode 0: random in region, 1: one line,
  // 2: one word per line
  task automatic access(int c, int mode, logic we, logic [T-1:0] mask);
    logic [T-1:0][31:0] ad, wd;
    logic [T-1:0][3:0] be;
    int base;
    base = c * REGION + 4 * $urandom_range(0, REGION / 4 - 16);
    for (int t = 0; t < T; t++) begin
      unique case (mode)
        0: ad[t] = 32'(4 * (c * REGION + $urandom_range(0, 31)));
        1: ad[t] = 32'(4 * (base + t));
        default: ad[t] = 32'(4 * (base + 4 * t));
      endcase
      wd[t] = $urandom();
      be[t] = we ? 4'($urandom()) : 4'hF;
    end
    if (we)
      for (int t = 0; t < T; t++)
        if (mask[t])
          for (int k = 0; k < 4; k++)
            if (be[t][k]) refm[ad[t] >> 2][8*k +: 8] = wd[t][8*k +: 8];
    @(negedge clk);
    req_valid[c] = 1; req_we[c] = we; req_mask[c] = mask;
    req_addr[c] = ad; req_wdata[c] = wd; req_be[c] = be;
    #1;
    while (!req_ready[c]) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid[c] = 0;
    while (!rsp_valid[c]) @(negedge clk);
    if (!we)
      for (int t = 0; t < T; t++)
        chk($sformatf("port %0d thread %0d", c, t), rsp_data[c][t],
            mask[t] ? refm[ad[t] >> 2] : 32'h0);
  endtask

  task automatic port(int c, int count);
    for (int n = 0; n < count; n++)
      access(c, $urandom_range(0, 2), $urandom_range(1), 4'($urandom_range(1, 15)));
  endtask

  initial begin
    int nb;
    for (int i = 0; i < NC * REGION; i++) begin bmem[i] = $urandom(); refm[i] = bmem[i]; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // coalescing, one port alone
    for (int n = 0; n < 10; n++) begin
      nb = n_bank;
      access(0, 1, 1'b0, 4'hF);
      chk("one line, one access", n_bank - nb, 1);
      nb = n_bank;
      access(0, 2, 1'b0, 4'hF);
      chk("four lines, four accesses", n_bank - nb, 4);
    end
    fork
      port(0, 300);
      port(1, 300);
    join
    repeat (10) @(negedge clk);
    for (int i = 0; i < NC * REGION; i++) chk("memory", bmem[i], refm[i]);
    checks++;
    if (n_conf == 0) begin failures++; $display("FAIL no bank conflict seen"); end
    $display("bank accesses %0d, conflicts %0d", n_bank, n_conf);
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
