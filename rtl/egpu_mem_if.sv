// egpu_mem_if: memory interface between the e-GPU caches and the host bus.
//
// It does the three steps the paper lists: (1) a cache line request (a line fill
// on a miss, or a write-through store) is serialized into individual 32-bit
// transactions; (2) these are issued with the OBI protocol on the e-GPU master
// port; (3) an arbiter shares that single port among all requesters (the
// instruction cache of every compute unit and every data cache bank). The
// round-robin policy, the one-request-at-a-time order and the single outstanding
// OBI transaction are this design's own choices: the port moves one word per
// transaction, at most 32 bits per cycle as in the paper's transfer model.
//
// Interface: requester i raises mreq_valid_i[i] with mreq_i[i] until
// mreq_ready_o[i]; the line is then read (words 0..nwords-1) or written (every
// word whose byte enables are non-zero), and mrsp_valid_o[i] pulses once with
// the read words in mrsp_data_o. OBI: req/addr/we/be/wdata are held until gnt;
// the next word is issued only after rvalid of the previous one.
module egpu_mem_if
  import egpu_pkg::*;
#(
  parameter int unsigned N = DEF_NUM_CU + DEF_DC_BANKS,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic       [N-1:0]    mreq_valid_i,
  output logic       [N-1:0]    mreq_ready_o,
  input  line_req_t  [N-1:0]    mreq_i,
  output logic       [N-1:0]    mrsp_valid_o,
  output line_data_t            mrsp_data_o,
  // OBI master
  output obi_req_t              obi_req_o,
  input  obi_rsp_t              obi_rsp_i
);

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA, S_DONE} state_e;
  state_e state_q, state_d;

  line_req_t  cur_q;
  logic [IW-1:0] owner_q;
  logic [3:0] word_q;
  line_data_t data_q;

  logic [N-1:0]  gnt;
  logic [IW-1:0] gnt_idx;
  logic          gnt_valid;

  egpu_rr_arbiter #(.N(N)) u_arb (
    .clk_i     (clk_i),
    .rst_ni    (rst_ni),
    .req_i     (mreq_valid_i),
    .advance_i (state_q == S_IDLE),
    .gnt_o     (gnt),
    .idx_o     (gnt_idx),
    .valid_o   (gnt_valid)
  );

  // first word at or after w that must be transferred; MEM_MAX_WORDS if none
  function automatic logic [3:0] next_word(line_req_t r, logic [3:0] w);
    next_word = 4'(MEM_MAX_WORDS);
    for (int k = MEM_MAX_WORDS - 1; k >= 0; k--) begin
      if (4'(k) >= w) begin
        if (r.we ? (r.be[k] != 4'b0) : (4'(k) < r.nwords)) next_word = 4'(k);
      end
    end
  endfunction

  logic [3:0] first_w, next_w;
  assign first_w = next_word(mreq_i[gnt_idx], 4'd0);
  assign next_w  = next_word(cur_q, word_q + 4'd1);

  always_comb begin
    state_d      = state_q;
    mreq_ready_o = '0;
    mrsp_valid_o = '0;
    mrsp_data_o  = data_q;
    obi_req_o    = '0;
    unique case (state_q)
      S_IDLE: begin
        if (gnt_valid) begin
          mreq_ready_o = gnt;
          state_d      = (first_w == 4'(MEM_MAX_WORDS)) ? S_DONE : S_ADDR;
        end
      end
      S_ADDR: begin
        obi_req_o.req   = 1'b1;
        obi_req_o.we    = cur_q.we;
        obi_req_o.be    = cur_q.we ? cur_q.be[word_q[2:0]] : 4'hF;
        obi_req_o.addr  = cur_q.addr + {26'd0, word_q, 2'b00};
        obi_req_o.wdata = cur_q.wdata[word_q[2:0]];
        if (obi_rsp_i.gnt) state_d = S_DATA;
      end
      S_DATA: begin
        if (obi_rsp_i.rvalid)
          state_d = (next_w == 4'(MEM_MAX_WORDS)) ? S_DONE : S_ADDR;
      end
      S_DONE: begin
        mrsp_valid_o[owner_q] = 1'b1;
        state_d               = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      cur_q   <= '0;
      owner_q <= '0;
      word_q  <= '0;
      data_q  <= '0;
    end else begin
      state_q <= state_d;
      if (state_q == S_IDLE && gnt_valid) begin
        cur_q   <= mreq_i[gnt_idx];
        owner_q <= gnt_idx;
        word_q  <= first_w;
        data_q  <= '0;
      end
      if (state_q == S_DATA && obi_rsp_i.rvalid) begin
        if (!cur_q.we) data_q[word_q[2:0]] <= obi_rsp_i.rdata;
        word_q <= next_w;
      end
    end
  end

  // OBI: the address phase must stay stable until granted
  property p_obi_stable;
    @(posedge clk_i) disable iff (!rst_ni)
      (obi_req_o.req && !obi_rsp_i.gnt) |=> (obi_req_o.req && $stable(obi_req_o.addr)
                                            && $stable(obi_req_o.we));
  endproperty
  a_obi_stable: assert property (p_obi_stable);

endmodule
