// tb_egpu_top: end-to-end test of the whole e-GPU at its default (high-range)
// configuration: 2 compute units x 4 warps x 8 threads, 16 KiB 8-bank data
// cache, 2 KiB instruction cache per unit.
//
// A behavioural host memory (egpu_tb_mem) sits on the master port and the
// testbench plays the host CPU on the slave port. The kernel of
// egpu_asm_pkg::vecop_kernel is placed at address 0 with its arguments at
// 0x1000. The host programs the boot address, starts the e-GPU, holds it with
// HALT for a while, waits for the interrupt, checks every output word against
// values computed here, clears the interrupt, writes new inputs, invalidates the
// caches and launches the kernel a second time. It also checks that a start
// under software reset is ignored. Every mechanism of the design must be seen at
// least once: warp spawn, warp switching, divergent SPLIT, barrier wait, data
// cache hit, miss and bank conflict, compute unit power-down, halt, interrupt.
module tb_egpu_top;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;

  localparam int NC = DEF_NUM_CU, NW = DEF_NUM_WARPS, NT = DEF_NUM_THREADS;
  localparam int TOTAL = NC * NW * NT;
  localparam int N = 2 * TOTAL;
  localparam logic [31:0] ARGS = 32'h1000, A = 32'h2000, B = 32'h3000, C = 32'h4000,
                          D = 32'h5000, E = 32'h6000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  obi_req_t slv_req, mst_req;
  obi_rsp_t slv_rsp, mst_rsp;
  logic irq;
  logic [NC-1:0] pwr_en, cu_busy;
  logic [NC-1:0][4:0] cu_evt;
  logic dc_hit, dc_miss, dc_conflict;

  egpu_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .slv_req_i(slv_req), .slv_rsp_o(slv_rsp),
    .mst_req_o(mst_req), .mst_rsp_i(mst_rsp),
    .irq_o(irq), .cu_pwr_en_o(pwr_en),
    .cu_evt_o(cu_evt), .cu_busy_o(cu_busy),
    .dc_hit_o(dc_hit), .dc_miss_o(dc_miss), .dc_conflict_o(dc_conflict)
  );

  egpu_tb_mem #(.WORDS(16384), .GNT_PCT(80)) u_mem (.clk_i(clk), .req_i(mst_req), .rsp_o(mst_rsp));

  int checks = 0, failures = 0;
  int n_retire = 0, n_div = 0, n_bar = 0, n_spawn = 0, n_switch = 0;
  int n_hit = 0, n_miss = 0, n_conf = 0, n_pdown = 0, n_irq = 0, n_halt_ok = 0;
  int retire_when_halted = 0;
  logic halted = 1'b0;
  logic [NC-1:0] pwr_prev = '0;
  logic irq_prev = 1'b0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (cu_evt[c][0]) n_retire++;
      if (cu_evt[c][1]) n_div++;
      if (cu_evt[c][2]) n_bar++;
      if (cu_evt[c][3]) n_spawn++;
      if (cu_evt[c][4]) n_switch++;
      if (pwr_prev[c] && !pwr_en[c]) n_pdown++;
      if (halted && cu_evt[c][0]) retire_when_halted++;
    end
    if (dc_hit) n_hit++;
    if (dc_miss) n_miss++;
    if (dc_conflict) n_conf++;
    if (irq && !irq_prev) n_irq++;
    pwr_prev <= pwr_en;
    irq_prev <= irq;
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  task automatic obi_write(logic [7:0] addr, logic [31:0] data);
    @(negedge clk);
    slv_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(addr), wdata: data};
    @(negedge clk);
    slv_req = '0;
  endtask

  task automatic obi_read(logic [7:0] addr, output logic [31:0] data);
    @(negedge clk);
    slv_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'(addr), wdata: '0};
    @(negedge clk);
    slv_req = '0;
    data = slv_rsp.rdata;
  endtask

  function automatic logic [31:0] word(logic [31:0] addr);
    return u_mem.mem[addr >> 2];
  endfunction

  task automatic load_inputs(int seed);
    for (int i = 0; i < N; i++) begin
      u_mem.mem[(A >> 2) + i] = $urandom();
      u_mem.mem[(B >> 2) + i] = $urandom() % 1000 + 32'(seed);
      u_mem.mem[(C >> 2) + i] = 32'hDEAD_BEEF;
    end
    for (int i = 0; i < N / 4; i++) u_mem.mem[(D >> 2) + i] = 32'hFFFF_FFFF;
    for (int i = 0; i < TOTAL; i++) u_mem.mem[(E >> 2) + i] = 32'hDEAD_BEEF;
  endtask

  task automatic check_outputs(string tag);
    for (int i = 0; i < N; i++) begin
      logic [31:0] a, b, e;
      a = word(A + 4 * i);
      b = word(B + 4 * i);
      e = (i % 2 == 1) ? a - b : a * b;
      check($sformatf("%s C[%0d]", tag, i), word(C + 4 * i), e);
    end
    for (int i = 0; i < N; i++)
      check($sformatf("%s D[%0d]", tag, i), 32'(word(D + 4 * (i / 4)) >> (8 * (i % 4)) & 8'hFF),
            32'(i & 8'hFF));
    for (int g = 0; g < TOTAL; g++) begin
      int core, warp, tid, src;
      core = g / (NW * NT);
      warp = (g / NT) % NW;
      tid  = g % NT;
      src  = (core * NW + (warp + 1) % NW) * NT + tid;
      check($sformatf("%s E[%0d]", tag, g), word(E + 4 * g), word(C + 4 * src));
    end
  endtask

  task automatic wait_irq(int limit);
    int n = 0;
    while (!irq && n < limit) begin
      @(posedge clk);
      n++;
    end
    checks++;
    if (!irq) begin
      failures++;
      $display("FAIL no interrupt after %0d cycles", limit);
    end else $display("kernel done after %0d cycles", n);
  endtask

  initial begin
    logic [31:0] r;
    int rr;
    slv_req = '0;
    for (int i = 0; i < VECOP_LEN; i++) u_mem.mem[i] = vecop_kernel(i, int'(ARGS >> 12));
    u_mem.mem[(ARGS >> 2) + 0] = A;
    u_mem.mem[(ARGS >> 2) + 1] = B;
    u_mem.mem[(ARGS >> 2) + 2] = C;
    u_mem.mem[(ARGS >> 2) + 3] = N;
    u_mem.mem[(ARGS >> 2) + 4] = D;
    u_mem.mem[(ARGS >> 2) + 5] = E;
    load_inputs(1);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    obi_read(REG_HWCFG, r);
    check("HWCFG", r, {8'd0, 8'(NT), 8'(NW), 8'(NC)});
    obi_write(REG_BOOT, 32'h0);
    obi_read(REG_BOOT, r);
    check("BOOT", r, 32'h0);

    // a start under software reset is ignored
    obi_write(REG_CTRL, 32'h2);
    obi_write(REG_CTRL, 32'h3);
    repeat (20) @(posedge clk);
    checks++;
    if (cu_busy != '0 || pwr_en != '0) begin failures++; $display("FAIL start under reset"); end
    obi_write(REG_CTRL, 32'h0);

    // first launch, with a HALT window
    obi_write(REG_CTRL, 32'h1);
    repeat (600) @(posedge clk);
    obi_write(REG_CTRL, 32'h4);
    repeat (40) @(posedge clk);     // the instruction in flight completes
    halted = 1'b1;
    rr = n_retire;
    repeat (300) @(posedge clk);
    halted = 1'b0;
    checks++;
    if (n_retire != rr) begin failures++; $display("FAIL retired while halted"); end
    else n_halt_ok++;
    obi_write(REG_CTRL, 32'h0);
    wait_irq(400000);
    obi_read(REG_STATUS, r);
    check("STATUS after run", r & 32'h3 | (r >> 8 & 32'(2**NC - 1)) << 8, 32'h2 | (32'(2**NC - 1) << 8));
    check_outputs("run1");
    obi_write(REG_IRQ, 32'h1);
    @(posedge clk);
    check("irq cleared", 32'(irq), 32'd0);

    // second launch with new inputs; the caches are invalidated first
    load_inputs(7);
    obi_write(REG_CTRL, 32'h8);
    obi_write(REG_CTRL, 32'h1);
    wait_irq(400000);
    check_outputs("run2");
    obi_write(REG_IRQ, 32'h1);

    // every mechanism must have happened
    begin
      string names[11] = '{"retire", "divergent split", "barrier wait", "warp spawn",
                           "warp switch", "dcache hit", "dcache miss", "bank conflict",
                           "cu power-down", "interrupt", "halt"};
      int cnt[11];
      cnt = '{n_retire, n_div, n_bar, n_spawn, n_switch, n_hit, n_miss, n_conf, n_pdown,
              n_irq, n_halt_ok};
      for (int k = 0; k < 11; k++) begin
        $display("mechanism %-16s : %0d", names[k], cnt[k]);
        checks++;
        if (cnt[k] == 0) begin failures++; $display("FAIL mechanism %s never happened", names[k]); end
      end
      checks++;
      if (n_pdown != 2 * NC) begin failures++; $display("FAIL power-downs %0d", n_pdown); end
      checks++;
      if (n_spawn != 2 * NC) begin failures++; $display("FAIL spawns %0d", n_spawn); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
