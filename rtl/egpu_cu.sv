// egpu_cu: one e-GPU compute unit, a SIMT RISC-V core without floating point.
//
// The compute unit runs NUM_WARPS warps of NUM_THREADS threads. All threads of
// a warp share one program counter and execute the same instruction on their own
// registers (lockstep); a per-warp thread mask says which threads take part.
// Warps are interleaved instruction by instruction (fine-grained
// multi-threading): after each instruction the scheduler moves round-robin to the
// next warp that is active and not waiting at a barrier.
//
// Instruction set: RV32IM, the read-only CSRs that give thread, warp and core
// identity and the hardware resources (egpu_pkg), and the custom-0 SIMT
// instructions TMC (set thread mask), WSPAWN (activate warps), SPLIT/JOIN
// (divergence with a reconvergence stack), BAR (barrier between warps) and
// SLEEP_REQ. The paper bases its compute unit on the Vortex core, removes the
// floating-point unit and adds SLEEP_REQ; it does not give the pipeline. This
// core is this design's own, much simpler, sequential version: fetch, execute
// and (for loads and stores) one data-cache access per instruction, one
// instruction in flight at a time. It is therefore not out of order and keeps
// no memory requests outstanding. Encodings of the SIMT instructions follow the
// public Vortex convention; SLEEP_REQ uses custom-0 funct3 = 7 (own choice).
// A branch whose threads disagree follows the lowest active thread; kernels use
// SPLIT/JOIN around divergent code, as on Vortex.
//
// SLEEP_REQ retires the issuing warp. Once a SLEEP_REQ has been seen, no warp is
// active and nothing is in flight, the unit raises sleep_o (end-of-execution
// event) and stays idle until the next start_i. So the event comes only after
// every previously fetched instruction has completed.
//
// Interface: start_i (one cycle) starts warp 0 with thread 0 only at boot_i;
// en_i low freezes the unit (clock enable driven by the power controller);
// halt_i stops issue after the current instruction. Fetch port: req/ready,
// then one rsp_valid pulse. Data port: one multi-thread request (mask, byte
// addresses, byte enables, lane-aligned write data) and one response pulse
// carrying a 32-bit word per thread.
module egpu_cu
  import egpu_pkg::*;
#(
  parameter int unsigned CU_ID       = 0,
  parameter int unsigned NUM_CU      = DEF_NUM_CU,
  parameter int unsigned NUM_THREADS = DEF_NUM_THREADS,
  parameter int unsigned NUM_WARPS   = DEF_NUM_WARPS,
  parameter int unsigned STACK_DEPTH = 8,     // SPLIT/JOIN entries per warp
  parameter int unsigned NUM_BARS    = 4,     // barrier ids
  localparam int unsigned T          = NUM_THREADS,
  localparam int unsigned W          = NUM_WARPS
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 en_i,
  input  logic                 start_i,
  input  logic [31:0]          boot_i,
  input  logic                 halt_i,
  output logic                 busy_o,
  output logic                 sleep_o,
  // instruction fetch
  output logic                 ic_req_valid_o,
  input  logic                 ic_req_ready_i,
  output logic [31:0]          ic_req_addr_o,
  input  logic                 ic_rsp_valid_i,
  input  logic [31:0]          ic_rsp_data_i,
  // data access
  output logic                 d_req_valid_o,
  input  logic                 d_req_ready_i,
  output logic                 d_req_we_o,
  output logic [T-1:0]         d_req_mask_o,
  output logic [T-1:0][31:0]   d_req_addr_o,
  output logic [T-1:0][3:0]    d_req_be_o,
  output logic [T-1:0][31:0]   d_req_wdata_o,
  input  logic                 d_rsp_valid_i,
  input  logic [T-1:0][31:0]   d_rsp_data_i,
  // events: [0] retire, [1] divergent split, [2] barrier wait, [3] warp spawn,
  //         [4] warp switch
  output logic [4:0]           evt_o
);

  localparam int unsigned WW  = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned SPW = $clog2(STACK_DEPTH + 1);
  localparam int unsigned BIW = (NUM_BARS > 1) ? $clog2(NUM_BARS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_SCHED, S_FETCH, S_FWAIT, S_EXEC, S_MEM, S_MWAIT, S_SLEEP}
    state_e;

  typedef enum logic [1:0] {K_NOP, K_ELSE, K_RESTORE} ipdom_kind_e;
  typedef struct packed {
    ipdom_kind_e  kind;
    logic [T-1:0] mask;
    logic [31:0]  pc;
  } ipdom_t;

  state_e                 state_q;
  logic [W-1:0]           active_q, barwait_q;
  logic [W-1:0][31:0]     pc_q;
  logic [W-1:0][T-1:0]    tmask_q;
  ipdom_t                 stack_q [W][STACK_DEPTH];
  logic [W-1:0][SPW-1:0]  sp_q;
  logic [NUM_BARS-1:0][W-1:0] bar_mask_q;
  logic [NUM_BARS-1:0][7:0]   bar_cnt_q;
  logic [31:0]            rf_q [W][T][32];
  logic [WW-1:0]          wid_q;
  logic [31:0]            instr_q;
  logic                   sleep_req_q;

  // ------------------------------------------------------------ scheduler
  logic [W-1:0] ready_w;
  logic         sel_valid;
  logic [WW-1:0] sel_w;
  assign ready_w = active_q & ~barwait_q;
  always_comb begin
    sel_valid = 1'b0;
    sel_w     = '0;
    for (int k = 1; k <= W; k++) begin
      int unsigned c;
      c = (int'(wid_q) + k) % W;
      if (!sel_valid && ready_w[c]) begin
        sel_valid = 1'b1;
        sel_w     = WW'(c);
      end
    end
  end

  // ------------------------------------------------------------ decode
  logic [6:0]  opc;
  logic [4:0]  rd, rs1, rs2;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  assign opc   = instr_q[6:0];
  assign rd    = instr_q[11:7];
  assign f3    = instr_q[14:12];
  assign rs1   = instr_q[19:15];
  assign rs2   = instr_q[24:20];
  assign f7    = instr_q[31:25];
  assign imm_i = {{20{instr_q[31]}}, instr_q[31:20]};
  assign imm_s = {{20{instr_q[31]}}, instr_q[31:25], instr_q[11:7]};
  assign imm_b = {{19{instr_q[31]}}, instr_q[31], instr_q[7], instr_q[30:25], instr_q[11:8], 1'b0};
  assign imm_u = {instr_q[31:12], 12'd0};
  assign imm_j = {{11{instr_q[31]}}, instr_q[31], instr_q[19:12], instr_q[20], instr_q[30:21], 1'b0};

  logic [31:0] pc;
  logic [T-1:0] tmask;
  assign pc    = pc_q[wid_q];
  assign tmask = tmask_q[wid_q];

  // operands
  logic [T-1:0][31:0] a, b;
  always_comb begin
    for (int t = 0; t < T; t++) begin
      a[t] = (rs1 == 5'd0) ? 32'd0 : rf_q[wid_q][t][rs1];
      b[t] = (rs2 == 5'd0) ? 32'd0 : rf_q[wid_q][t][rs2];
    end
  end

  // lowest active thread: decides branches and uniform SIMT operands
  logic [$clog2(T+1)-1:0] lead;
  always_comb begin
    lead = '0;
    for (int t = T - 1; t >= 0; t--) if (tmask[t]) lead = $bits(lead)'(t);
  end
  logic [31:0] la, lb;
  assign la = a[lead[$clog2(T+1)-1:0]];
  assign lb = b[lead[$clog2(T+1)-1:0]];

  // ------------------------------------------------------------ ALU
  function automatic logic [31:0] alu(logic [31:0] x, logic [31:0] y, logic [2:0] fn,
                                      logic alt, logic mext);
    logic [63:0] p;
    if (mext) begin
      unique case (fn)
        3'd0: alu = x * y;
        3'd1: begin p = 64'($signed(x)) * 64'($signed(y)); alu = p[63:32]; end
        3'd2: begin p = 64'($signed(x)) * {32'd0, y};      alu = p[63:32]; end
        3'd3: begin p = {32'd0, x} * {32'd0, y};           alu = p[63:32]; end
        3'd4: alu = (y == 0) ? 32'hFFFF_FFFF :
                    (x == 32'h8000_0000 && y == 32'hFFFF_FFFF) ? x :
                    32'($signed(x) / $signed(y));
        3'd5: alu = (y == 0) ? 32'hFFFF_FFFF : x / y;
        3'd6: alu = (y == 0) ? x :
                    (x == 32'h8000_0000 && y == 32'hFFFF_FFFF) ? 32'd0 :
                    32'($signed(x) % $signed(y));
        default: alu = (y == 0) ? x : x % y;
      endcase
    end else begin
      unique case (fn)
        3'd0: alu = alt ? x - y : x + y;
        3'd1: alu = x << y[4:0];
        3'd2: alu = {31'd0, $signed(x) < $signed(y)};
        3'd3: alu = {31'd0, x < y};
        3'd4: alu = x ^ y;
        3'd5: alu = alt ? 32'($signed(x) >>> y[4:0]) : x >> y[4:0];
        3'd6: alu = x | y;
        default: alu = x & y;
      endcase
    end
  endfunction

  function automatic logic [31:0] csr_val(logic [11:0] addr, int unsigned t, logic [WW-1:0] w,
                                          logic [W-1:0] act, logic [T-1:0] tm);
    unique case (addr)
      CSR_THREAD_ID:    csr_val = 32'(t);
      CSR_WARP_ID:      csr_val = 32'(w);
      CSR_CORE_ID:      csr_val = 32'(CU_ID);
      CSR_ACTIVE_WARPS: csr_val = 32'(act);
      CSR_THREAD_MASK:  csr_val = 32'(tm);
      CSR_NUM_THREADS:  csr_val = 32'(T);
      CSR_NUM_WARPS:    csr_val = 32'(W);
      CSR_NUM_CORES:    csr_val = 32'(NUM_CU);
      CSR_MHARTID:      csr_val = 32'((CU_ID * W + int'(w)) * T + t);
      default:          csr_val = 32'd0;
    endcase
  endfunction

  // per-thread results of the current instruction (non-memory)
  logic [T-1:0][31:0] res;
  logic               wr_en;
  logic [31:0]        npc;
  logic               br_taken;
  always_comb begin
    wr_en    = 1'b0;
    npc      = pc + 32'd4;
    br_taken = 1'b0;
    for (int t = 0; t < T; t++) begin
      res[t] = '0;
      unique case (opc)
        OP_LUI:   res[t] = imm_u;
        OP_AUIPC: res[t] = pc + imm_u;
        OP_JAL, OP_JALR: res[t] = pc + 32'd4;
        OP_IMM:   res[t] = alu(a[t], imm_i, f3, (f3 == 3'd5) && f7[5], 1'b0);
        OP_REG:   res[t] = alu(a[t], b[t], f3, f7[5], f7[0]);
        OP_SYSTEM: res[t] = csr_val(instr_q[31:20], t, wid_q, active_q, tmask);
        default:  res[t] = '0;
      endcase
    end
    unique case (opc)
      OP_LUI, OP_AUIPC, OP_IMM, OP_REG: wr_en = 1'b1;
      OP_SYSTEM: wr_en = (f3 != 3'd0);
      OP_JAL: begin wr_en = 1'b1; npc = pc + imm_j; end
      OP_JALR: begin wr_en = 1'b1; npc = (la + imm_i) & ~32'd1; end
      OP_BRANCH: begin
        unique case (f3)
          3'd0: br_taken = (la == lb);
          3'd1: br_taken = (la != lb);
          3'd4: br_taken = ($signed(la) < $signed(lb));
          3'd5: br_taken = ($signed(la) >= $signed(lb));
          3'd6: br_taken = (la < lb);
          3'd7: br_taken = (la >= lb);
          default: br_taken = 1'b0;
        endcase
        if (br_taken) npc = pc + imm_b;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ memory request
  logic [T-1:0][31:0] maddr;
  logic [T-1:0][3:0]  mbe;
  logic [T-1:0][31:0] mwdata;
  always_comb begin
    for (int t = 0; t < T; t++) begin
      maddr[t]  = a[t] + ((opc == OP_STORE) ? imm_s : imm_i);
      unique case (f3[1:0])
        2'd0:    mbe[t] = 4'b0001 << maddr[t][1:0];
        2'd1:    mbe[t] = 4'b0011 << maddr[t][1:0];
        default: mbe[t] = 4'b1111;
      endcase
      mwdata[t] = b[t] << (8 * maddr[t][1:0]);
    end
  end

  always_comb begin
    d_req_valid_o = (state_q == S_MEM);
    d_req_we_o    = (opc == OP_STORE);
    d_req_mask_o  = tmask;
    d_req_addr_o  = maddr;
    d_req_be_o    = mbe;
    d_req_wdata_o = mwdata;
  end

  function automatic logic [31:0] load_ext(logic [31:0] word, logic [1:0] off, logic [2:0] fn);
    logic [31:0] s;
    s = word >> (8 * off);
    unique case (fn)
      3'd0:    load_ext = {{24{s[7]}}, s[7:0]};
      3'd1:    load_ext = {{16{s[15]}}, s[15:0]};
      3'd4:    load_ext = {24'd0, s[7:0]};
      3'd5:    load_ext = {16'd0, s[15:0]};
      default: load_ext = s;
    endcase
  endfunction

  assign ic_req_valid_o = (state_q == S_FETCH);
  assign ic_req_addr_o  = pc;
  assign busy_o         = (state_q != S_IDLE) && (state_q != S_SLEEP);
  assign sleep_o        = (state_q == S_SLEEP);

  // ------------------------------------------------------------ sequencing
  logic is_simt, is_mem;
  assign is_simt = (opc == OP_SIMT);
  assign is_mem  = (opc == OP_LOAD) || (opc == OP_STORE);

  // operands of the SIMT control instructions
  localparam int unsigned SIW = $clog2(STACK_DEPTH);
  logic [T-1:0]   split_tk, split_nt;
  logic [SIW-1:0] sp_top, sp_next;
  ipdom_t         join_e;
  logic [BIW-1:0] bar_id;
  always_comb begin
    for (int t = 0; t < T; t++) split_tk[t] = tmask[t] && (a[t] != 32'd0);
    split_nt = tmask & ~split_tk;
    sp_top   = SIW'(sp_q[wid_q]);
    sp_next  = SIW'(sp_q[wid_q] + SPW'(1));
    join_e   = stack_q[wid_q][SIW'(sp_q[wid_q] - SPW'(1))];
    bar_id   = BIW'(la);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_IDLE;
      active_q    <= '0;
      barwait_q   <= '0;
      pc_q        <= '0;
      tmask_q     <= '0;
      sp_q        <= '0;
      bar_mask_q  <= '0;
      bar_cnt_q   <= '0;
      wid_q       <= '0;
      instr_q     <= '0;
      sleep_req_q <= 1'b0;
      evt_o       <= '0;
    end else if (en_i) begin
      evt_o <= '0;
      unique case (state_q)
        S_IDLE, S_SLEEP: begin
          if (start_i) begin
            active_q    <= W'(1);
            barwait_q   <= '0;
            tmask_q     <= '0;
            tmask_q[0]  <= T'(1);
            pc_q[0]     <= boot_i;
            sp_q        <= '0;
            bar_mask_q  <= '0;
            bar_cnt_q   <= '0;
            wid_q       <= WW'(W - 1);
            sleep_req_q <= 1'b0;
            state_q     <= S_SCHED;
          end
        end
        S_SCHED: begin
          if (!halt_i) begin
            if (sel_valid) begin
              evt_o[4] <= (sel_w != wid_q);
              wid_q    <= sel_w;
              state_q  <= S_FETCH;
            end else if (active_q == '0 && sleep_req_q) begin
              state_q <= S_SLEEP;
            end else if (active_q == '0) begin
              state_q <= S_IDLE;
            end
          end
        end
        S_FETCH: if (ic_req_ready_i) state_q <= S_FWAIT;
        S_FWAIT: if (ic_rsp_valid_i) begin
          instr_q <= ic_rsp_data_i;
          state_q <= S_EXEC;
        end
        S_EXEC: begin
          if (is_mem) begin
            state_q <= S_MEM;
          end else begin
            evt_o[0]     <= 1'b1;
            state_q      <= S_SCHED;
            pc_q[wid_q]  <= npc;
            if (wr_en && rd != 5'd0)
              for (int t = 0; t < T; t++) if (tmask[t]) rf_q[wid_q][t][rd] <= res[t];
            if (is_simt) begin
              unique case (f3)
                SIMT_TMC: begin
                  tmask_q[wid_q] <= la[T-1:0];
                  if (la[T-1:0] == '0) active_q[wid_q] <= 1'b0;
                end
                SIMT_WSPAWN: begin
                  evt_o[3] <= 1'b1;
                  for (int w = 1; w < W; w++) begin
                    if (32'(w) < la && !active_q[w]) begin
                      active_q[w] <= 1'b1;
                      pc_q[w]     <= lb;
                      tmask_q[w]  <= T'(1);
                      sp_q[w]     <= '0;
                    end
                  end
                end
                SIMT_SPLIT: begin
                  if (split_tk != '0 && split_nt != '0 && int'(sp_q[wid_q]) + 2 <= STACK_DEPTH) begin
                    evt_o[1] <= 1'b1;
                    stack_q[wid_q][sp_top]  <= '{kind: K_RESTORE, mask: tmask, pc: '0};
                    stack_q[wid_q][sp_next] <= '{kind: K_ELSE, mask: split_nt, pc: pc + 32'd4};
                    sp_q[wid_q]    <= sp_q[wid_q] + SPW'(2);
                    tmask_q[wid_q] <= split_tk;
                  end else if (int'(sp_q[wid_q]) < STACK_DEPTH) begin
                    stack_q[wid_q][sp_top] <= '{kind: K_NOP, mask: tmask, pc: '0};
                    sp_q[wid_q] <= sp_q[wid_q] + SPW'(1);
                  end
                end
                SIMT_JOIN: begin
                  if (sp_q[wid_q] != '0) begin
                    sp_q[wid_q] <= sp_q[wid_q] - SPW'(1);
                    if (join_e.kind != K_NOP) tmask_q[wid_q] <= join_e.mask;
                    if (join_e.kind == K_ELSE) pc_q[wid_q] <= join_e.pc;
                  end
                end
                SIMT_BAR: begin
                  if (32'(bar_cnt_q[bar_id]) + 32'd1 >= lb) begin
                    barwait_q       <= barwait_q & ~bar_mask_q[bar_id];
                    bar_mask_q[bar_id]  <= '0;
                    bar_cnt_q[bar_id]   <= '0;
                  end else begin
                    evt_o[2]              <= 1'b1;
                    barwait_q[wid_q]      <= 1'b1;
                    bar_mask_q[bar_id][wid_q] <= 1'b1;
                    bar_cnt_q[bar_id]         <= bar_cnt_q[bar_id] + 8'd1;
                  end
                end
                SIMT_SLEEP: begin
                  active_q[wid_q] <= 1'b0;
                  sleep_req_q     <= 1'b1;
                end
                default: ;
              endcase
            end
          end
        end
        S_MEM: if (d_req_ready_i) state_q <= S_MWAIT;
        S_MWAIT: if (d_rsp_valid_i) begin
          evt_o[0]    <= 1'b1;
          pc_q[wid_q] <= pc + 32'd4;
          state_q     <= S_SCHED;
          if (opc == OP_LOAD && rd != 5'd0)
            for (int t = 0; t < T; t++)
              if (tmask[t]) rf_q[wid_q][t][rd] <= load_ext(d_rsp_data_i[t], maddr[t][1:0], f3);
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // a data request keeps its address stable until accepted
  a_dreq_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (d_req_valid_o && !d_req_ready_i && en_i) |=> $stable(d_req_addr_o));

endmodule
