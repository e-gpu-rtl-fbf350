// egpu_pkg: constants and bus types shared by the e-GPU modules.
//
// The default configuration is the high-range one with 16 threads: two compute
// units, eight parallel threads and four concurrent warps per compute unit, a
// 2 KiB single-bank instruction cache with 16-byte lines per compute unit, and a
// shared 16 KiB data cache with eight banks and 32-byte lines. These numbers are
// the paper's. Everything else here (bus structs, line-request format, custom
// opcode and CSR numbers, register map) is this implementation's own choice; the
// SIMT opcode and CSR numbering follows the public Vortex convention.
package egpu_pkg;

  // ---------------------------------------------------------------- configuration
  localparam int unsigned DEF_NUM_CU        = 2;
  localparam int unsigned DEF_NUM_THREADS   = 8;
  localparam int unsigned DEF_NUM_WARPS     = 4;
  localparam int unsigned DEF_IC_SIZE       = 2048;   // bytes per compute unit
  localparam int unsigned DEF_IC_LINE       = 16;     // bytes
  localparam int unsigned DEF_DC_SIZE       = 16384;  // bytes, shared
  localparam int unsigned DEF_DC_BANKS      = 8;
  localparam int unsigned DEF_DC_LINE       = 32;     // bytes = threads x 4
  localparam int unsigned DEF_DC_LATENCY    = 4;      // cycles of a data-cache hit
  localparam logic [31:0] DEF_BOOT_ADDR     = 32'h0000_0000;

  // Widest line any cache may request from the memory interface (words).
  localparam int unsigned MEM_MAX_WORDS     = 8;

  // ---------------------------------------------------------------- OBI (32 bit)
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } obi_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } obi_rsp_t;

  // ------------------------------------------ cache line request to the memory side
  // A read fetches words 0..nwords-1 of the line at addr. A write stores every word
  // whose byte enables are not all zero. The memory interface answers each request
  // with one response carrying the read words.
  typedef struct packed {
    logic [31:0]                     addr;    // line-aligned byte address
    logic                            we;
    logic [3:0]                      nwords;  // words to read (1..MEM_MAX_WORDS)
    logic [MEM_MAX_WORDS-1:0][3:0]   be;
    logic [MEM_MAX_WORDS-1:0][31:0]  wdata;
  } line_req_t;

  typedef logic [MEM_MAX_WORDS-1:0][31:0] line_data_t;

  // ---------------------------------------------------------------- ISA constants
  typedef enum logic [6:0] {
    OP_LUI    = 7'b0110111,
    OP_AUIPC  = 7'b0010111,
    OP_JAL    = 7'b1101111,
    OP_JALR   = 7'b1100111,
    OP_BRANCH = 7'b1100011,
    OP_LOAD   = 7'b0000011,
    OP_STORE  = 7'b0100011,
    OP_IMM    = 7'b0010011,
    OP_REG    = 7'b0110011,
    OP_FENCE  = 7'b0001111,
    OP_SYSTEM = 7'b1110011,
    OP_SIMT   = 7'b0001011    // custom-0: SIMT control and SLEEP_REQ
  } opcode_e;

  // funct3 of the custom-0 (SIMT) instructions
  typedef enum logic [2:0] {
    SIMT_TMC    = 3'd0,   // set thread mask = rs1 (of the lowest active thread)
    SIMT_WSPAWN = 3'd1,   // activate warps 1..rs1-1 at pc rs2
    SIMT_SPLIT  = 3'd2,   // diverge on the per-thread predicate rs1
    SIMT_JOIN   = 3'd3,   // reconverge
    SIMT_BAR    = 3'd4,   // barrier id rs1, wait for rs2 warps
    SIMT_SLEEP  = 3'd7    // SLEEP_REQ: end of kernel on this warp
  } simt_funct3_e;

  // read-only CSRs giving hardware resources and thread identity
  localparam logic [11:0] CSR_THREAD_ID      = 12'hCC0;
  localparam logic [11:0] CSR_WARP_ID        = 12'hCC1;
  localparam logic [11:0] CSR_CORE_ID        = 12'hCC2;
  localparam logic [11:0] CSR_ACTIVE_WARPS   = 12'hCC3;
  localparam logic [11:0] CSR_THREAD_MASK    = 12'hCC4;
  localparam logic [11:0] CSR_NUM_THREADS    = 12'hFC0;
  localparam logic [11:0] CSR_NUM_WARPS      = 12'hFC1;
  localparam logic [11:0] CSR_NUM_CORES      = 12'hFC2;
  localparam logic [11:0] CSR_MHARTID        = 12'hF14;

  // ------------------------------------------------ controller register map (bytes)
  localparam logic [7:0] REG_CTRL     = 8'h00; // [0] start (W1), [1] reset, [2] halt
  localparam logic [7:0] REG_STATUS   = 8'h04; // [0] busy, [1] irq, [8+:CU] cu done
  localparam logic [7:0] REG_BOOT     = 8'h08; // kernel base (boot) address
  localparam logic [7:0] REG_IRQ      = 8'h0C; // [0] pending, write 1 to clear
  localparam logic [7:0] REG_POWER    = 8'h10; // [0+:CU] clock enable, [16+:CU] power on
  localparam logic [7:0] REG_HWCFG    = 8'h14; // [7:0] CUs, [15:8] warps, [23:16] threads

endpackage
