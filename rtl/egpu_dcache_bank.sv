// egpu_dcache_bank: one bank of the shared data cache.
//
// The shared data cache is direct-mapped and split into BANKS banks with
// line-interleaved addressing: consecutive lines go to consecutive banks, so
// the bank number is the lowest bits of the line address and this bank indexes
// its sets with the bits above them. Each bank holds SIZE/BANKS bytes. The paper
// gives this organisation and the four-cycle access latency; the write policy
// and the FSM are this design's own: the bank is write-through without write
// allocate (every store goes to host memory, and updates the line if it is
// present), so host memory always holds the results and no flush is needed when
// a kernel ends. The bank is blocking: while it fetches a line it takes no other
// request.
//
// Interface: the request is a whole-line line_req_t from the cache interface
// (addr line aligned, we, per-word byte enables and write data). rsp_valid_o
// pulses once per request, LATENCY cycles after acceptance on a read hit, with
// the full line in rsp_data_o; on a read miss after the line fill; on a write
// after host memory acknowledged it. The memory side issues line reads
// (LINE/4 words) and writes (only the enabled words) as line_req_t.
module egpu_dcache_bank
  import egpu_pkg::*;
#(
  parameter int unsigned SIZE    = DEF_DC_SIZE / DEF_DC_BANKS,  // bytes in this bank
  parameter int unsigned LINE    = DEF_DC_LINE,                 // bytes
  parameter int unsigned BANKS   = DEF_DC_BANKS,                // banks in the cache
  parameter int unsigned LATENCY = DEF_DC_LATENCY               // hit latency, >= 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        flush_i,
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  line_req_t   req_i,
  output logic        rsp_valid_o,
  output line_data_t  rsp_data_o,
  output logic        mreq_valid_o,
  input  logic        mreq_ready_i,
  output line_req_t   mreq_o,
  input  logic        mrsp_valid_i,
  input  line_data_t  mrsp_data_i,
  // event counters' sources
  output logic        hit_o,
  output logic        miss_o
);

  localparam int unsigned WORDS = LINE / 4;
  localparam int unsigned LINES = SIZE / LINE;
  localparam int unsigned OFFW  = $clog2(LINE);
  localparam int unsigned BSELW = (BANKS > 1) ? $clog2(BANKS) : 0;
  localparam int unsigned IDXW  = (LINES > 1) ? $clog2(LINES) : 1;
  localparam int unsigned TAGW  = 32 - OFFW - BSELW - IDXW;

  initial begin
    assert (WORDS <= MEM_MAX_WORDS) else $error("egpu_dcache_bank: line too wide");
    assert (LATENCY >= 2) else $error("egpu_dcache_bank: LATENCY must be >= 2");
  end

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_HITWAIT, S_MREQ, S_MWAIT, S_RESP} state_e;
  state_e state_q, state_d;

  line_req_t         cur_q;
  logic [TAGW-1:0]   tag_q [LINES];
  logic [LINES-1:0]  valid_q;
  logic [7:0]        cnt_q;
  line_data_t        data_q;

  logic [IDXW-1:0]   idx;
  logic [TAGW-1:0]   tag_in;
  assign idx    = cur_q.addr[OFFW + BSELW +: IDXW];
  assign tag_in = cur_q.addr[31 -: TAGW];

  logic              sram_req, sram_we;
  logic [IDXW-1:0]   sram_addr;
  logic [LINE-1:0]   sram_be;
  logic [LINE*8-1:0] sram_wdata, sram_rdata;

  egpu_sram #(.WIDTH(LINE*8), .DEPTH(LINES)) u_data (
    .clk_i   (clk_i),
    .req_i   (sram_req),
    .we_i    (sram_we),
    .addr_i  (sram_addr),
    .be_i    (sram_be),
    .wdata_i (sram_wdata),
    .rdata_o (sram_rdata)
  );

  logic hit;
  assign hit = valid_q[idx] && (tag_q[idx] == tag_in);

  always_comb begin
    state_d      = state_q;
    req_ready_o  = 1'b0;
    rsp_valid_o  = 1'b0;
    rsp_data_o   = data_q;
    sram_req     = 1'b0;
    sram_we      = 1'b0;
    sram_addr    = req_i.addr[OFFW + BSELW +: IDXW];
    sram_be      = '0;
    sram_wdata   = '0;
    mreq_valid_o = 1'b0;
    hit_o        = 1'b0;
    miss_o       = 1'b0;
    unique case (state_q)
      S_IDLE: begin
        req_ready_o = !flush_i;
        if (req_valid_i && !flush_i) begin
          sram_req = 1'b1;
          state_d  = S_LOOKUP;
        end
      end
      S_LOOKUP: begin
        hit_o  = hit;
        miss_o = !hit;
        if (cur_q.we) begin
          // write-through: update the line if present, always write to memory
          if (hit) begin
            sram_req  = 1'b1;
            sram_we   = 1'b1;
            sram_addr = idx;
            for (int w = 0; w < WORDS; w++) begin
              sram_be[4*w +: 4]     = cur_q.be[w];
              sram_wdata[32*w +: 32] = cur_q.wdata[w];
            end
          end
          state_d = S_MREQ;
        end else if (hit) begin
          state_d = (LATENCY == 2) ? S_RESP : S_HITWAIT;
        end else begin
          state_d = S_MREQ;
        end
      end
      S_HITWAIT: if (cnt_q == 8'(LATENCY - 3)) state_d = S_RESP;
      S_MREQ: begin
        mreq_valid_o = 1'b1;
        if (mreq_ready_i) state_d = S_MWAIT;
      end
      S_MWAIT: begin
        if (mrsp_valid_i) begin
          if (!cur_q.we) begin
            sram_req  = 1'b1;
            sram_we   = 1'b1;
            sram_addr = idx;
            sram_be   = '1;
            for (int w = 0; w < WORDS; w++) sram_wdata[32*w +: 32] = mrsp_data_i[w];
          end
          state_d = S_RESP;
        end
      end
      S_RESP: begin
        rsp_valid_o = 1'b1;
        state_d     = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_comb begin
    mreq_o        = cur_q;
    mreq_o.addr   = {cur_q.addr[31:OFFW], {OFFW{1'b0}}};
    mreq_o.nwords = 4'(WORDS);
    if (!cur_q.we) begin
      mreq_o.be    = '0;
      mreq_o.wdata = '0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      valid_q <= '0;
      cur_q   <= '0;
      cnt_q   <= '0;
      data_q  <= '0;
    end else begin
      state_q <= state_d;
      if (state_q == S_IDLE && req_valid_i && !flush_i) cur_q <= req_i;
      if (flush_i) valid_q <= '0;
      cnt_q <= (state_q == S_HITWAIT) ? cnt_q + 8'd1 : 8'd0;
      if (state_q == S_LOOKUP && !cur_q.we && hit) begin
        data_q <= '0;
        for (int w = 0; w < WORDS; w++) data_q[w] <= sram_rdata[32*w +: 32];
      end
      if (state_q == S_MWAIT && mrsp_valid_i) begin
        data_q <= mrsp_data_i;
        if (!cur_q.we) valid_q[idx] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (state_q == S_MWAIT && mrsp_valid_i && !cur_q.we) tag_q[idx] <= tag_in;
  end

endmodule
