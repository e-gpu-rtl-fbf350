// egpu_top: the e-GPU, a configurable SIMT RISC-V GPU for a microcontroller
// host.
//
// NUM_CU compute units each fetch from a private instruction cache and share
// one multi-bank data cache through the cache interface, which turns each unit's
// multi-threaded request into line requests to the banks. The instruction
// caches and the data cache banks reach host memory through the memory
// interface, which serializes their lines into 32-bit OBI transactions on the
// single master port. The controller holds the memory-mapped registers on the
// OBI slave port, starts the units at the kernel base address, gates the clock
// and power of each unit as it executes SLEEP_REQ, and raises irq_o when all
// have finished. This block structure is the paper's (its Fig. 2); the defaults
// are its high-range configuration (2 CUs x 8 threads x 4 warps, 2 KiB
// instruction cache per CU with 16-byte lines, 16 KiB data cache with 8 banks
// of 32-byte lines).
//
// Ports: clock and active-low reset; OBI slave (configuration) and OBI master
// (instructions and data in host memory); irq_o to the host interrupt
// controller; cu_pwr_en_o, the power-switch enable of each compute unit; event
// outputs (instruction retired, divergence, barrier wait, warp spawn, warp
// switch per unit, and data cache hit, miss and bank conflict) for counters. A
// software reset (CTRL[1]) holds compute units and caches in reset. The clock
// gate of each unit is modelled as the unit's enable input.
module egpu_top
  import egpu_pkg::*;
#(
  parameter int unsigned NUM_CU      = DEF_NUM_CU,
  parameter int unsigned NUM_THREADS = DEF_NUM_THREADS,
  parameter int unsigned NUM_WARPS   = DEF_NUM_WARPS,
  parameter int unsigned IC_SIZE     = DEF_IC_SIZE,
  parameter int unsigned IC_BANKS    = 1,
  parameter int unsigned IC_LINE     = DEF_IC_LINE,
  parameter int unsigned DC_SIZE     = DEF_DC_SIZE,
  parameter int unsigned DC_BANKS    = DEF_DC_BANKS,
  parameter int unsigned DC_LINE     = NUM_THREADS * 4,
  parameter int unsigned DC_LATENCY  = DEF_DC_LATENCY,
  parameter logic [31:0] BOOT_ADDR   = DEF_BOOT_ADDR
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  obi_req_t          slv_req_i,
  output obi_rsp_t          slv_rsp_o,
  output obi_req_t          mst_req_o,
  input  obi_rsp_t          mst_rsp_i,
  output logic              irq_o,
  output logic [NUM_CU-1:0] cu_pwr_en_o,
  // event outputs for performance counters
  output logic [NUM_CU-1:0][4:0] cu_evt_o,     // per unit, see egpu_cu evt_o
  output logic [NUM_CU-1:0] cu_busy_o,
  output logic              dc_hit_o,
  output logic              dc_miss_o,
  output logic              dc_conflict_o
);

  localparam int unsigned T  = NUM_THREADS;
  localparam int unsigned NM = NUM_CU + DC_BANKS;

  // ---------------------------------------------------------------- controller
  logic [31:0]       boot_addr;
  logic              soft_rst, halt, flush, cu_start;
  logic [NUM_CU-1:0] cu_clk_en, cu_sleep;
  logic              core_rst_n;

  egpu_controller #(
    .NUM_CU(NUM_CU), .NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS), .BOOT_ADDR(BOOT_ADDR)
  ) u_ctrl (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .slv_req_i   (slv_req_i),
    .slv_rsp_o   (slv_rsp_o),
    .boot_addr_o (boot_addr),
    .soft_rst_o  (soft_rst),
    .halt_o      (halt),
    .flush_o     (flush),
    .cu_start_o  (cu_start),
    .cu_clk_en_o (cu_clk_en),
    .cu_pwr_en_o (cu_pwr_en_o),
    .cu_sleep_i  (cu_sleep),
    .irq_o       (irq_o)
  );

  assign core_rst_n = rst_ni && !soft_rst;

  // ---------------------------------------------------------------- compute units
  logic [NUM_CU-1:0]                ic_req_valid, ic_req_ready, ic_rsp_valid;
  logic [NUM_CU-1:0][31:0]          ic_req_addr, ic_rsp_data;
  logic [NUM_CU-1:0]                d_req_valid, d_req_ready, d_req_we, d_rsp_valid;
  logic [NUM_CU-1:0][T-1:0]         d_req_mask;
  logic [NUM_CU-1:0][T-1:0][31:0]   d_req_addr, d_req_wdata, d_rsp_data;
  logic [NUM_CU-1:0][T-1:0][3:0]    d_req_be;

  logic       [NM-1:0] m_valid, m_ready, m_rsp_valid;
  line_req_t  [NM-1:0] m_req;
  line_data_t          m_rsp_data;

  for (genvar c = 0; c < NUM_CU; c++) begin : g_cu

    egpu_cu #(
      .CU_ID(c), .NUM_CU(NUM_CU), .NUM_THREADS(NUM_THREADS), .NUM_WARPS(NUM_WARPS)
    ) u_cu (
      .clk_i          (clk_i),
      .rst_ni         (core_rst_n),
      .en_i           (cu_clk_en[c]),
      .start_i        (cu_start),
      .boot_i         (boot_addr),
      .halt_i         (halt),
      .busy_o         (cu_busy_o[c]),
      .sleep_o        (cu_sleep[c]),
      .ic_req_valid_o (ic_req_valid[c]),
      .ic_req_ready_i (ic_req_ready[c]),
      .ic_req_addr_o  (ic_req_addr[c]),
      .ic_rsp_valid_i (ic_rsp_valid[c]),
      .ic_rsp_data_i  (ic_rsp_data[c]),
      .d_req_valid_o  (d_req_valid[c]),
      .d_req_ready_i  (d_req_ready[c]),
      .d_req_we_o     (d_req_we[c]),
      .d_req_mask_o   (d_req_mask[c]),
      .d_req_addr_o   (d_req_addr[c]),
      .d_req_be_o     (d_req_be[c]),
      .d_req_wdata_o  (d_req_wdata[c]),
      .d_rsp_valid_i  (d_rsp_valid[c]),
      .d_rsp_data_i   (d_rsp_data[c]),
      .evt_o          (cu_evt_o[c])
    );

    egpu_icache #(.SIZE(IC_SIZE), .LINE(IC_LINE), .BANKS(IC_BANKS)) u_icache (
      .clk_i        (clk_i),
      .rst_ni       (core_rst_n),
      .flush_i      (flush),
      .req_valid_i  (ic_req_valid[c]),
      .req_ready_o  (ic_req_ready[c]),
      .req_addr_i   (ic_req_addr[c]),
      .rsp_valid_o  (ic_rsp_valid[c]),
      .rsp_data_o   (ic_rsp_data[c]),
      .mreq_valid_o (m_valid[c]),
      .mreq_ready_i (m_ready[c]),
      .mreq_o       (m_req[c]),
      .mrsp_valid_i (m_rsp_valid[c]),
      .mrsp_data_i  (m_rsp_data)
    );
  end

  // ---------------------------------------------------------------- data cache
  logic       [DC_BANKS-1:0] b_valid, b_ready, b_rsp_valid, b_hit, b_miss;
  line_req_t  [DC_BANKS-1:0] b_req;
  line_data_t [DC_BANKS-1:0] b_rsp_data;

  egpu_cache_if #(
    .NUM_CU(NUM_CU), .NUM_THREADS(NUM_THREADS), .BANKS(DC_BANKS), .LINE(DC_LINE)
  ) u_cache_if (
    .clk_i        (clk_i),
    .rst_ni       (core_rst_n),
    .req_valid_i  (d_req_valid),
    .req_ready_o  (d_req_ready),
    .req_we_i     (d_req_we),
    .req_mask_i   (d_req_mask),
    .req_addr_i   (d_req_addr),
    .req_be_i     (d_req_be),
    .req_wdata_i  (d_req_wdata),
    .rsp_valid_o  (d_rsp_valid),
    .rsp_data_o   (d_rsp_data),
    .breq_valid_o (b_valid),
    .breq_ready_i (b_ready),
    .breq_o       (b_req),
    .brsp_valid_i (b_rsp_valid),
    .brsp_data_i  (b_rsp_data),
    .conflict_o   (dc_conflict_o)
  );

  for (genvar b = 0; b < DC_BANKS; b++) begin : g_bank
    egpu_dcache_bank #(
      .SIZE(DC_SIZE / DC_BANKS), .LINE(DC_LINE), .BANKS(DC_BANKS), .LATENCY(DC_LATENCY)
    ) u_bank (
      .clk_i        (clk_i),
      .rst_ni       (core_rst_n),
      .flush_i      (flush),
      .req_valid_i  (b_valid[b]),
      .req_ready_o  (b_ready[b]),
      .req_i        (b_req[b]),
      .rsp_valid_o  (b_rsp_valid[b]),
      .rsp_data_o   (b_rsp_data[b]),
      .mreq_valid_o (m_valid[NUM_CU + b]),
      .mreq_ready_i (m_ready[NUM_CU + b]),
      .mreq_o       (m_req[NUM_CU + b]),
      .mrsp_valid_i (m_rsp_valid[NUM_CU + b]),
      .mrsp_data_i  (m_rsp_data),
      .hit_o        (b_hit[b]),
      .miss_o       (b_miss[b])
    );
  end

  assign dc_hit_o  = |b_hit;
  assign dc_miss_o = |b_miss;

  // ---------------------------------------------------------------- memory interface
  egpu_mem_if #(.N(NM)) u_mem_if (
    .clk_i        (clk_i),
    .rst_ni       (core_rst_n),
    .mreq_valid_i (m_valid),
    .mreq_ready_o (m_ready),
    .mreq_i       (m_req),
    .mrsp_valid_o (m_rsp_valid),
    .mrsp_data_o  (m_rsp_data),
    .obi_req_o    (mst_req_o),
    .obi_rsp_i    (mst_rsp_i)
  );

endmodule
