// tb_egpu_controller: self-checking test of the controller registers.
//
// Drives the OBI slave port and plays the compute units' sleep events. Checks
// the OBI timing (gnt in the request cycle, rvalid one cycle later), reset
// values, the boot address register with byte enables, the read-only hardware
// configuration, that a start launches the units (start pulse, clock and power
// enables), that a second start while busy is ignored, that the interrupt is
// raised only after every unit reported and stays until cleared, the reset and
// halt levels, the cache-invalidate pulse and that start is ignored in reset.
module tb_egpu_controller;
  import egpu_pkg::*;
  localparam int NC = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  obi_req_t req = '0;
  obi_rsp_t rsp;
  logic [31:0] boot;
  logic soft_rst, halt, flush, cu_start, irq;
  logic [NC-1:0] clk_en, pwr_en, sleep = '0;
  int n_start = 0, n_flush = 0;

  egpu_controller #(.NUM_CU(NC), .NUM_WARPS(4), .NUM_THREADS(8), .BOOT_ADDR(32'h180)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(req), .slv_rsp_o(rsp), .boot_addr_o(boot),
    .soft_rst_o(soft_rst), .halt_o(halt), .flush_o(flush), .cu_start_o(cu_start),
    .cu_clk_en_o(clk_en), .cu_pwr_en_o(pwr_en), .cu_sleep_i(sleep), .irq_o(irq)
  );

  always @(posedge clk) begin
    if (cu_start && rst_n) n_start++;
    if (flush && rst_n) n_flush++;
  end

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d, logic [3:0] be = 4'hF);
    @(negedge clk);
    req = '{req: 1, we: 1, be: be, addr: 32'(a), wdata: d};
    #1 chk("gnt in request cycle", 32'(rsp.gnt), 1);
    @(negedge clk);
    req = '0;
    chk("write rvalid", 32'(rsp.rvalid), 1);
  endtask
  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    req = '{req: 1, we: 0, be: 4'hF, addr: 32'(a), wdata: '0};
    @(negedge clk);
    req = '0;
    chk("read rvalid", 32'(rsp.rvalid), 1);
    d = rsp.rdata;
  endtask

  initial begin
    logic [31:0] r;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd(REG_BOOT, r);   chk("boot reset value", r, 32'h180);
    chk("boot output", boot, 32'h180);
    rd(REG_HWCFG, r);  chk("hwcfg", r, 32'h00080402);
    wr(REG_BOOT, 32'hAABBCCDD);
    wr(REG_BOOT, 32'h11223344, 4'b0100);
    rd(REG_BOOT, r);   chk("boot with byte enables", r, 32'hAA22CCDD);
    chk("boot output", boot, 32'hAA22CCDD);
    rd(REG_STATUS, r); chk("status idle", r, 0);
    // reset level blocks start
    wr(REG_CTRL, 32'h2);
    chk("soft reset level", 32'(soft_rst), 1);
    wr(REG_CTRL, 32'h3);
    repeat (3) @(negedge clk);
    chk("no start in reset", n_start, 0);
    wr(REG_CTRL, 32'h4);
    chk("halt level", 32'(halt), 1);
    chk("reset released", 32'(soft_rst), 0);
    wr(REG_CTRL, 32'h0);
    // start
    wr(REG_CTRL, 32'h1);
    repeat (3) @(negedge clk);
    chk("one start pulse", n_start, 1);
    chk("clocks on", 32'(clk_en), 2'b11);
    chk("power on", 32'(pwr_en), 2'b11);
    rd(REG_STATUS, r); chk("busy", r & 1, 1);
    rd(REG_POWER, r);  chk("power register", r, 32'h0003_0003);
    wr(REG_CTRL, 32'h1);  // ignored while busy
    repeat (3) @(negedge clk);
    chk("start ignored while busy", n_start, 1);
    sleep = 2'b10;
    repeat (3) @(negedge clk);
    chk("unit 1 gated", 32'(clk_en), 2'b01);
    chk("no irq yet", 32'(irq), 0);
    rd(REG_STATUS, r); chk("status cu1 done", r, 32'h0000_0201);
    sleep = 2'b11;
    repeat (3) @(negedge clk);
    chk("irq raised", 32'(irq), 1);
    chk("all gated", 32'(clk_en | pwr_en), 0);
    rd(REG_STATUS, r); chk("status done", r, 32'h0000_0302);
    rd(REG_IRQ, r);    chk("irq pending", r, 1);
    repeat (5) @(negedge clk);
    chk("irq held", 32'(irq), 1);
    wr(REG_IRQ, 32'h1);
    @(negedge clk);
    chk("irq cleared", 32'(irq), 0);
    // invalidate pulse
    wr(REG_CTRL, 32'h8);
    repeat (2) @(negedge clk);
    chk("one flush pulse", n_flush, 1);
    // second kernel: stale sleep events are ignored at the start
    wr(REG_CTRL, 32'h1);
    @(negedge clk);
    sleep = 2'b00;
    repeat (3) @(negedge clk);
    chk("second start", n_start, 2);
    chk("second run powered", 32'(pwr_en), 2'b11);
    sleep = 2'b11;
    repeat (3) @(negedge clk);
    chk("second irq", 32'(irq), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
