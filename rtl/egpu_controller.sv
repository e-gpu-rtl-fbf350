// egpu_controller: e-GPU controller with its memory-mapped configuration
// registers and the power controller.
//
// The host reaches the registers through the e-GPU's OBI slave port. Through
// them it resets, starts and halts the accelerator, sets the kernel base (boot)
// address and clears the completion interrupt; this much is the paper's. The
// register map and bit positions are this design's own (see egpu_pkg):
//   0x00 CTRL   [0] start (write 1), [1] reset (level), [2] halt (level),
//               [3] invalidate caches (write 1)
//   0x04 STATUS [0] busy, [1] irq pending, [8+i] compute unit i finished (RO)
//   0x08 BOOT   kernel base address; every compute unit starts there
//   0x0C IRQ    [0] pending; write 1 to clear
//   0x10 POWER  [i] clock enable, [16+i] power enable of compute unit i (RO)
//   0x14 HWCFG  [7:0] compute units, [15:8] warps, [23:16] threads (RO)
// A start while the e-GPU is busy is ignored. Completion (all compute units
// asleep) sets the pending bit, which drives irq_o until the host clears it.
//
// OBI slave timing: gnt is given in the cycle of the request; rvalid and rdata
// follow one cycle later, for reads and writes alike. Unmapped addresses read
// as zero and ignore writes.
module egpu_controller
  import egpu_pkg::*;
#(
  parameter int unsigned NUM_CU      = DEF_NUM_CU,
  parameter int unsigned NUM_WARPS   = DEF_NUM_WARPS,
  parameter int unsigned NUM_THREADS = DEF_NUM_THREADS,
  parameter logic [31:0] BOOT_ADDR   = DEF_BOOT_ADDR
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // configuration port (OBI slave)
  input  obi_req_t          slv_req_i,
  output obi_rsp_t          slv_rsp_o,
  // to the compute units and caches
  output logic [31:0]       boot_addr_o,
  output logic              soft_rst_o,
  output logic              halt_o,
  output logic              flush_o,
  output logic              cu_start_o,
  output logic [NUM_CU-1:0] cu_clk_en_o,
  output logic [NUM_CU-1:0] cu_pwr_en_o,
  input  logic [NUM_CU-1:0] cu_sleep_i,
  // to the host interrupt controller
  output logic              irq_o
);

  logic [31:0] boot_q;
  logic        rst_q, halt_q, irq_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic        start_pulse, flush_pulse;
  logic        pc_busy, pc_done;
  logic [NUM_CU-1:0] cu_done;
  logic [31:0] rdata_q_d;

  logic       wr, rd;
  logic [7:0] a;
  assign wr = slv_req_i.req && slv_req_i.we;
  assign rd = slv_req_i.req && !slv_req_i.we;
  assign a  = {slv_req_i.addr[7:2], 2'b00};

  assign start_pulse = wr && (a == REG_CTRL) && slv_req_i.be[0] && slv_req_i.wdata[0]
                       && !pc_busy && !rst_q;
  assign flush_pulse = wr && (a == REG_CTRL) && slv_req_i.be[0] && slv_req_i.wdata[3];

  egpu_power_ctrl #(.NUM_CU(NUM_CU)) u_pwr (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .start_i     (start_pulse),
    .abort_i     (rst_q),
    .cu_sleep_i  (cu_sleep_i),
    .cu_clk_en_o (cu_clk_en_o),
    .cu_pwr_en_o (cu_pwr_en_o),
    .cu_start_o  (cu_start_o),
    .cu_done_o   (cu_done),
    .busy_o      (pc_busy),
    .done_o      (pc_done)
  );

  always_comb begin
    unique case (a)
      REG_CTRL:   rdata_q_d = {29'd0, halt_q, rst_q, 1'b0};
      REG_STATUS: rdata_q_d = 32'({cu_done, 6'd0, irq_q, pc_busy});
      REG_BOOT:   rdata_q_d = boot_q;
      REG_IRQ:    rdata_q_d = {31'd0, irq_q};
      REG_POWER:  rdata_q_d = 32'(cu_clk_en_o) | (32'(cu_pwr_en_o) << 16);
      REG_HWCFG:  rdata_q_d = {8'd0, 8'(NUM_THREADS), 8'(NUM_WARPS), 8'(NUM_CU)};
      default:    rdata_q_d = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      boot_q   <= BOOT_ADDR;
      rst_q    <= 1'b0;
      halt_q   <= 1'b0;
      irq_q    <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
      flush_o  <= 1'b0;
    end else begin
      rvalid_q <= slv_req_i.req;
      rdata_q  <= rd ? rdata_q_d : '0;
      flush_o  <= flush_pulse;
      if (wr && a == REG_CTRL && slv_req_i.be[0]) begin
        rst_q  <= slv_req_i.wdata[1];
        halt_q <= slv_req_i.wdata[2];
      end
      if (wr && a == REG_BOOT) begin
        for (int i = 0; i < 4; i++)
          if (slv_req_i.be[i]) boot_q[8*i +: 8] <= slv_req_i.wdata[8*i +: 8];
      end
      if (pc_done) irq_q <= 1'b1;
      else if (wr && a == REG_IRQ && slv_req_i.be[0] && slv_req_i.wdata[0]) irq_q <= 1'b0;
    end
  end

  assign slv_rsp_o.gnt    = slv_req_i.req;
  assign slv_rsp_o.rvalid = rvalid_q;
  assign slv_rsp_o.rdata  = rdata_q;

  assign boot_addr_o = boot_q;
  assign soft_rst_o  = rst_q;
  assign halt_o      = halt_q;
  assign irq_o       = irq_q;

endmodule
