// egpu_cache_if: data cache interface between the compute units and the
// banks of the shared data cache.
//
// Each compute unit issues one multi-threaded request: a thread mask and, per
// thread, a byte address, byte enables and write data. It receives one unified
// response holding a word per thread; words of masked-off threads read as zero.
// This is the interface the paper describes. How the request is taken apart is
// this design's own: the per-CU port walks the active threads, takes the lowest
// pending thread, groups every pending thread whose address falls in the same
// cache line and sends that group as one whole-line request (merged byte enables
// and data; on a byte written by two threads the higher thread wins) to the bank
// that owns the line (line-interleaved: bank = line address mod BANKS). When the
// bank answers, each thread of the group takes its word from the line. Threads
// reading sequential words therefore cost one bank access. The ports of
// different compute units work in parallel and only wait on each other when
// they target the same bank (a bank conflict); each bank has a round-robin
// arbiter.
//
// Interface, per compute unit c: req_valid_i[c]/req_ready_o[c] with req_we_i,
// req_mask_i, req_addr_i, req_be_i, req_wdata_i; rsp_valid_o[c] pulses once with
// rsp_data_o[c]. Per bank b: breq_valid_o/breq_ready_i/breq_o and
// brsp_valid_i/brsp_data_i of egpu_dcache_bank.
module egpu_cache_if
  import egpu_pkg::*;
#(
  parameter int unsigned NUM_CU      = DEF_NUM_CU,
  parameter int unsigned NUM_THREADS = DEF_NUM_THREADS,
  parameter int unsigned BANKS       = DEF_DC_BANKS,
  parameter int unsigned LINE        = DEF_DC_LINE,
  localparam int unsigned T          = NUM_THREADS
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  // compute unit side
  input  logic [NUM_CU-1:0]                req_valid_i,
  output logic [NUM_CU-1:0]                req_ready_o,
  input  logic [NUM_CU-1:0]                req_we_i,
  input  logic [NUM_CU-1:0][T-1:0]         req_mask_i,
  input  logic [NUM_CU-1:0][T-1:0][31:0]   req_addr_i,
  input  logic [NUM_CU-1:0][T-1:0][3:0]    req_be_i,
  input  logic [NUM_CU-1:0][T-1:0][31:0]   req_wdata_i,
  output logic [NUM_CU-1:0]                rsp_valid_o,
  output logic [NUM_CU-1:0][T-1:0][31:0]   rsp_data_o,
  // bank side
  output logic [BANKS-1:0]                 breq_valid_o,
  input  logic [BANKS-1:0]                 breq_ready_i,
  output line_req_t [BANKS-1:0]            breq_o,
  input  logic [BANKS-1:0]                 brsp_valid_i,
  input  line_data_t [BANKS-1:0]           brsp_data_i,
  // bank conflicts seen (a port wanted a bank another port was using)
  output logic                             conflict_o
);

  localparam int unsigned OFFW  = $clog2(LINE);
  localparam int unsigned WORDS = LINE / 4;
  localparam int unsigned BW    = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int unsigned CW    = (NUM_CU > 1) ? $clog2(NUM_CU) : 1;

  typedef enum logic [1:0] {P_IDLE, P_SEND, P_WAIT, P_RESP} pstate_e;

  pstate_e [NUM_CU-1:0]              pst_q;
  logic    [NUM_CU-1:0]              we_q;
  logic    [NUM_CU-1:0][T-1:0]       pend_q;
  logic    [NUM_CU-1:0][T-1:0][31:0] addr_q, wdata_q, rdata_q;
  logic    [NUM_CU-1:0][T-1:0][3:0]  be_q;

  // ----------------------------------------------------- per-port current group
  logic      [NUM_CU-1:0][T-1:0] grp;
  logic      [NUM_CU-1:0][BW-1:0] gbank;
  line_req_t [NUM_CU-1:0]        greq;

  always_comb begin
    for (int c = 0; c < NUM_CU; c++) begin
      logic        found;
      logic [31:0] line_a;
      found   = 1'b0;
      line_a  = '0;
      grp[c]  = '0;
      greq[c] = '0;
      for (int t = 0; t < T; t++) begin
        if (pend_q[c][t] && !found) begin
          found  = 1'b1;
          line_a = {addr_q[c][t][31:OFFW], {OFFW{1'b0}}};
        end
      end
      for (int t = 0; t < T; t++)
        if (pend_q[c][t] && (addr_q[c][t][31:OFFW] == line_a[31:OFFW])) grp[c][t] = 1'b1;
      greq[c].addr   = line_a;
      greq[c].we     = we_q[c];
      greq[c].nwords = 4'(WORDS);
      if (we_q[c]) begin
        for (int t = 0; t < T; t++) begin
          if (grp[c][t]) begin
            for (int b = 0; b < 4; b++) begin
              if (be_q[c][t][b]) begin
                greq[c].be[addr_q[c][t][OFFW-1:2]][b]            = 1'b1;
                greq[c].wdata[addr_q[c][t][OFFW-1:2]][8*b +: 8]  = wdata_q[c][t][8*b +: 8];
              end
            end
          end
        end
      end
      gbank[c] = (BANKS > 1) ? BW'(line_a[OFFW +: BW]) : '0;
    end
  end

  // ----------------------------------------------------- per-bank arbitration
  logic [BANKS-1:0]             bbusy_q;
  logic [BANKS-1:0][CW-1:0]     bowner_q;
  logic [BANKS-1:0][NUM_CU-1:0] bwant, bgnt;
  logic [BANKS-1:0][CW-1:0]     bgnt_idx;
  logic [BANKS-1:0]             bgnt_valid;

  always_comb begin
    for (int b = 0; b < BANKS; b++)
      for (int c = 0; c < NUM_CU; c++)
        bwant[b][c] = (pst_q[c] == P_SEND) && (gbank[c] == BW'(b));
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank_arb
    egpu_rr_arbiter #(.N(NUM_CU)) u_arb (
      .clk_i     (clk_i),
      .rst_ni    (rst_ni),
      .req_i     (bwant[b] & {NUM_CU{!bbusy_q[b]}}),
      .advance_i (breq_ready_i[b]),
      .gnt_o     (bgnt[b]),
      .idx_o     (bgnt_idx[b]),
      .valid_o   (bgnt_valid[b])
    );
    assign breq_valid_o[b] = bgnt_valid[b];
    assign breq_o[b]       = greq[bgnt_idx[b]];
  end

  // accepted[c]: this port's group was taken by its bank this cycle
  logic [NUM_CU-1:0] accepted, answered;
  always_comb begin
    accepted   = '0;
    answered   = '0;
    conflict_o = 1'b0;
    for (int b = 0; b < BANKS; b++) begin
      for (int c = 0; c < NUM_CU; c++) begin
        if (bgnt[b][c] && breq_ready_i[b]) accepted[c] = 1'b1;
        if (bwant[b][c] && (bbusy_q[b] || (bgnt_valid[b] && !bgnt[b][c]))) conflict_o = 1'b1;
      end
      if (bbusy_q[b] && brsp_valid_i[b]) answered[bowner_q[b]] = 1'b1;
    end
  end

  always_comb begin
    for (int c = 0; c < NUM_CU; c++) begin
      req_ready_o[c] = (pst_q[c] == P_IDLE);
      rsp_valid_o[c] = (pst_q[c] == P_RESP);
      rsp_data_o[c]  = rdata_q[c];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pst_q    <= '{default: P_IDLE};
      we_q     <= '0;
      pend_q   <= '0;
      addr_q   <= '0;
      wdata_q  <= '0;
      rdata_q  <= '0;
      be_q     <= '0;
      bbusy_q  <= '0;
      bowner_q <= '0;
    end else begin
      for (int b = 0; b < BANKS; b++) begin
        if (bbusy_q[b] && brsp_valid_i[b]) bbusy_q[b] <= 1'b0;
        if (bgnt_valid[b] && breq_ready_i[b]) begin
          bbusy_q[b]  <= 1'b1;
          bowner_q[b] <= bgnt_idx[b];
        end
      end
      for (int c = 0; c < NUM_CU; c++) begin
        unique case (pst_q[c])
          P_IDLE: if (req_valid_i[c]) begin
            we_q[c]    <= req_we_i[c];
            pend_q[c]  <= req_mask_i[c];
            addr_q[c]  <= req_addr_i[c];
            be_q[c]    <= req_be_i[c];
            wdata_q[c] <= req_wdata_i[c];
            rdata_q[c] <= '0;
            pst_q[c]   <= (req_mask_i[c] == '0) ? P_RESP : P_SEND;
          end
          P_SEND: if (accepted[c]) pst_q[c] <= P_WAIT;
          P_WAIT: if (answered[c]) begin
            for (int t = 0; t < T; t++)
              if (grp[c][t] && !we_q[c])
                rdata_q[c][t] <= brsp_data_i[gbank[c]][addr_q[c][t][OFFW-1:2]];
            pend_q[c] <= pend_q[c] & ~grp[c];
            pst_q[c]  <= ((pend_q[c] & ~grp[c]) == '0) ? P_RESP : P_SEND;
          end
          P_RESP: pst_q[c] <= P_IDLE;
          default: pst_q[c] <= P_IDLE;
        endcase
      end
    end
  end

endmodule
