// egpu_icache: private instruction cache of one compute unit.
//
// Direct-mapped and single-bank, as in the evaluated configurations (2 KiB with
// 16-byte lines, i.e. four instructions per line, per compute unit). Tags and
// valid bits sit in flip-flops; the line data sits in an egpu_sram wrapper. The
// cache is blocking: one fetch at a time. On a miss it asks the memory interface
// for the whole line, writes it into the data array and answers from the filled
// line. The write path is absent: kernels do not modify their own code. The
// paper names the organisation; the FSM, the blocking behaviour and the
// handshake are this design's own choices.
//
// Interface: req_valid_i/req_ready_o/req_addr_i take a fetch address (word
// aligned); rsp_valid_o pulses for one cycle with the instruction in rsp_data_o
// and must be taken by the requester in that cycle. A hit answers in the cycle
// after acceptance: the SRAM is read in the accepting cycle and the tag is
// compared in the next. flush_i invalidates every line.
// The memory side issues one line_req_t (read of LINE/4 words) and waits for the
// matching response. Being read-only, the cache drives the write fields of that
// request (we, byte enables, write data) as constant zeros.
module egpu_icache
  import egpu_pkg::*;
#(
  parameter int unsigned SIZE  = DEF_IC_SIZE,   // bytes
  parameter int unsigned LINE  = DEF_IC_LINE,   // bytes
  parameter int unsigned BANKS = 1              // only one bank is supported
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        flush_i,
  // fetch port
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  logic [31:0] req_addr_i,
  output logic        rsp_valid_o,
  output logic [31:0] rsp_data_o,
  // memory side
  output logic        mreq_valid_o,
  input  logic        mreq_ready_i,
  output line_req_t   mreq_o,
  input  logic        mrsp_valid_i,
  input  line_data_t  mrsp_data_i
);

  localparam int unsigned WORDS = LINE / 4;
  localparam int unsigned LINES = SIZE / LINE;
  localparam int unsigned OFFW  = $clog2(LINE);
  localparam int unsigned IDXW  = $clog2(LINES);
  localparam int unsigned TAGW  = 32 - OFFW - IDXW;
  localparam int unsigned WSELW = (WORDS > 1) ? $clog2(WORDS) : 1;

  initial begin
    assert (BANKS == 1) else $error("egpu_icache: only one bank is supported");
    assert (WORDS <= MEM_MAX_WORDS) else $error("egpu_icache: line too wide");
  end

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_MREQ, S_MWAIT, S_FILLRSP} state_e;
  state_e state_q, state_d;

  logic [TAGW-1:0]   tag_q   [LINES];
  logic [LINES-1:0]  valid_q;
  logic [31:0]       addr_q;
  logic [LINE*8-1:0] fill_q;

  logic [IDXW-1:0]   idx_q;
  logic [TAGW-1:0]   tag_in_q;
  logic [WSELW-1:0]  wsel_q;
  assign idx_q    = addr_q[OFFW +: IDXW];
  assign tag_in_q = addr_q[31 -: TAGW];
  assign wsel_q   = WSELW'(addr_q[OFFW-1:2]);

  logic              sram_req, sram_we;
  logic [IDXW-1:0]   sram_addr;
  logic [LINE*8-1:0] sram_rdata, sram_wdata;

  egpu_sram #(.WIDTH(LINE*8), .DEPTH(LINES)) u_data (
    .clk_i   (clk_i),
    .req_i   (sram_req),
    .we_i    (sram_we),
    .addr_i  (sram_addr),
    .be_i    ({(LINE){1'b1}}),
    .wdata_i (sram_wdata),
    .rdata_o (sram_rdata)
  );

  logic hit;
  assign hit = valid_q[idx_q] && (tag_q[idx_q] == tag_in_q);

  always_comb begin
    state_d      = state_q;
    req_ready_o  = 1'b0;
    rsp_valid_o  = 1'b0;
    rsp_data_o   = '0;
    sram_req     = 1'b0;
    sram_we      = 1'b0;
    sram_addr    = req_addr_i[OFFW +: IDXW];
    sram_wdata   = '0;
    mreq_valid_o = 1'b0;
    for (int w = 0; w < WORDS; w++) sram_wdata[32*w +: 32] = mrsp_data_i[w];
    unique case (state_q)
      S_IDLE: begin
        req_ready_o = !flush_i;
        if (req_valid_i && !flush_i) begin
          sram_req = 1'b1;
          state_d  = S_LOOKUP;
        end
      end
      S_LOOKUP: begin
        if (hit) begin
          rsp_valid_o = 1'b1;
          rsp_data_o  = sram_rdata[32*wsel_q +: 32];
          state_d     = S_IDLE;
        end else begin
          state_d = S_MREQ;
        end
      end
      S_MREQ: begin
        mreq_valid_o = 1'b1;
        if (mreq_ready_i) state_d = S_MWAIT;
      end
      S_MWAIT: begin
        if (mrsp_valid_i) begin
          sram_req  = 1'b1;
          sram_we   = 1'b1;
          sram_addr = idx_q;
          state_d   = S_FILLRSP;
        end
      end
      S_FILLRSP: begin
        rsp_valid_o = 1'b1;
        rsp_data_o  = fill_q[32*wsel_q +: 32];
        state_d     = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_comb begin
    mreq_o        = '0;
    mreq_o.addr   = {addr_q[31:OFFW], {OFFW{1'b0}}};
    mreq_o.we     = 1'b0;
    mreq_o.nwords = 4'(WORDS);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      valid_q <= '0;
      addr_q  <= '0;
      fill_q  <= '0;
    end else begin
      state_q <= state_d;
      if (state_q == S_IDLE && req_valid_i && !flush_i) addr_q <= req_addr_i;
      if (flush_i) valid_q <= '0;
      if (state_q == S_MWAIT && mrsp_valid_i) begin
        valid_q[idx_q] <= 1'b1;
        fill_q         <= sram_wdata;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (state_q == S_MWAIT && mrsp_valid_i) tag_q[idx_q] <= tag_in_q;
  end

endmodule
