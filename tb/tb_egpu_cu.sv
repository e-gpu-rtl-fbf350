// tb_egpu_cu: self-checking test of one compute unit (4 threads x 2 warps,
// unit id 1 of 2) running an instruction-by-instruction test program.
//
// Behavioural models stand in for the caches: the fetch port reads a word of
// the array mem after a random delay, and the data port serves a whole
// multi-thread request from the same array after a random delay (writes in
// thread order, honouring byte enables). Warp 0 spawns warp 1; both turn on all
// threads. Each thread (gid = warp*4 + tid) reads two inputs a, b and stores,
// in its own 32-word result slot: add, sub, slt, xor, mul, mulh, div, remu,
// sll, srai, a SPLIT/JOIN selected value (a for odd tid, b for even), a signed
// byte load, an unsigned halfword load, the JAL and JALR link values, the sum of
// a warp-uniform loop, the core-id CSR and, after a barrier between the two
// warps, a value stored by the other warp. Each thread also stores one byte. The
// testbench computes every expected value itself. Input pairs include division
// by zero and the signed overflow case. It also checks the end-of-execution
// sleep, a halt window, and that every event (retire, divergent split, barrier
// wait, warp spawn, warp switch) happened.
module tb_egpu_cu;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;
  localparam int T = 4, W = 2, NC = 2, CID = 1;
  localparam int IN = 32'h1000, RES = 32'h2000, BYT = 32'h3000;
  localparam int MAIN = 4, ELSE = 47, ENDIF = 48, LOOP = 68, LEND = 72, PLEN = 91;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, halt = 0, busy, sleep;
  logic ic_req_valid, ic_req_ready = 0, ic_rsp_valid = 0;
  logic [31:0] ic_req_addr, ic_rsp_data = '0;
  logic d_req_valid, d_req_ready = 0, d_req_we, d_rsp_valid = 0;
  logic [T-1:0] d_req_mask;
  logic [T-1:0][31:0] d_req_addr, d_req_wdata, d_rsp_data = '0;
  logic [T-1:0][3:0] d_req_be;
  logic [4:0] evt;
  logic [31:0] mem [4096];

  egpu_cu #(.CU_ID(CID), .NUM_CU(NC), .NUM_THREADS(T), .NUM_WARPS(W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(1'b1), .start_i(start), .boot_i(32'h0),
    .halt_i(halt), .busy_o(busy), .sleep_o(sleep),
    .ic_req_valid_o(ic_req_valid), .ic_req_ready_i(ic_req_ready), .ic_req_addr_o(ic_req_addr),
    .ic_rsp_valid_i(ic_rsp_valid), .ic_rsp_data_i(ic_rsp_data),
    .d_req_valid_o(d_req_valid), .d_req_ready_i(d_req_ready), .d_req_we_o(d_req_we),
    .d_req_mask_o(d_req_mask), .d_req_addr_o(d_req_addr), .d_req_be_o(d_req_be),
    .d_req_wdata_o(d_req_wdata), .d_rsp_valid_i(d_rsp_valid), .d_rsp_data_i(d_rsp_data),
    .evt_o(evt)
  );

  function automatic logic [31:0] prog(int i);
    unique case (i)
      0:  return CSRR(1, C_NW);
      1:  return ADDI(2, 0, MAIN * 4);
      2:  return WSPAWN(1, 2);
      3:  return NOP();
      4:  return CSRR(3, C_NT);
      5:  return ADDI(4, 0, 1);
      6:  return SLL(4, 4, 3);
      7:  return ADDI(4, 4, -1);
      8:  return TMC(4);
      9:  return CSRR(5, C_TID);
      10: return CSRR(6, C_WID);
      11: return CSRR(3, C_NT);
      12: return MUL(7, 6, 3);
      13: return ADD(7, 7, 5);
      14: return SLLI(8, 7, 7);
      15: return LUI(9, RES >> 12);
      16: return ADD(9, 9, 8);
      17: return SLLI(11, 7, 3);
      18: return LUI(12, IN >> 12);
      19: return ADD(11, 11, 12);
      20: return LW(10, 11, 0);
      21: return LW(17, 11, 4);
      22: return ADD(20, 10, 17);   23: return SW(20, 9, 0);
      24: return SUB(20, 10, 17);   25: return SW(20, 9, 4);
      26: return SLT(20, 10, 17);   27: return SW(20, 9, 8);
      28: return XOR(20, 10, 17);   29: return SW(20, 9, 12);
      30: return MUL(20, 10, 17);   31: return SW(20, 9, 16);
      32: return MULH(20, 10, 17);  33: return SW(20, 9, 20);
      34: return DIV(20, 10, 17);   35: return SW(20, 9, 24);
      36: return REMU(20, 10, 17);  37: return SW(20, 9, 28);
      38: return SLL(20, 10, 17);   39: return SW(20, 9, 32);
      40: return SRAI(20, 10, 3);   41: return SW(20, 9, 36);
      42: return ANDI(15, 5, 1);
      43: return SPLIT(15);
      44: return BEQ(15, 0, (ELSE - 44) * 4);
      45: return ADD(16, 10, 0);
      46: return JAL(0, (ENDIF - 46) * 4);
      47: return ADD(16, 17, 0);
      48: return JOIN();
      49: return SW(16, 9, 40);
      50: return ANDI(13, 7, 3);
      51: return ADD(13, 13, 11);
      52: return LB(20, 13, 0);
      53: return SW(20, 9, 44);
      54: return ANDI(14, 7, 1);
      55: return SLLI(14, 14, 1);
      56: return ADD(14, 14, 11);
      57: return LHU(20, 14, 0);
      58: return SW(20, 9, 48);
      59: return JAL(18, 8);
      60: return ADDI(18, 0, 0);
      61: return SW(18, 9, 52);
      62: return ADDI(19, 0, 65 * 4);
      63: return JALR(20, 19, 0);
      64: return ADDI(20, 0, 0);
      65: return SW(20, 9, 56);
      66: return ADDI(21, 0, 0);
      67: return ADDI(22, 6, 3);
      68: return BEQ(22, 0, (LEND - 68) * 4);
      69: return ADD(21, 21, 22);
      70: return ADDI(22, 22, -1);
      71: return JAL(0, (LOOP - 71) * 4);
      72: return SW(21, 9, 60);
      73: return CSRR(20, C_CID);
      74: return SW(20, 9, 64);
      75: return LUI(24, BYT >> 12);
      76: return ADD(24, 24, 7);
      77: return ADDI(25, 7, 32'h40);
      78: return SB(25, 24, 0);
      79: return CSRR(1, C_NW);
      80: return BAR(0, 1);
      81: return ADDI(26, 6, 1);
      82: return REMU(26, 26, 1);
      83: return MUL(26, 26, 3);
      84: return ADD(26, 26, 5);
      85: return SLLI(26, 26, 7);
      86: return LUI(27, RES >> 12);
      87: return ADD(27, 27, 26);
      88: return LW(28, 27, 0);
      89: return SW(28, 9, 68);
      90: return SLEEP_REQ();
      default: return NOP();
    endcase
  endfunction

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  // fetch model
  initial forever begin
    @(negedge clk);
    ic_rsp_valid = 0;
    if (ic_req_valid && $urandom_range(3) != 0) begin
      logic [31:0] a;
      a = ic_req_addr;
      ic_req_ready = 1;
      @(negedge clk);
      ic_req_ready = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      ic_rsp_data = mem[(a >> 2) % 4096];
      ic_rsp_valid = 1;
    end
  end

  // data model
  int n_dreq = 0;
  initial forever begin
    @(negedge clk);
    d_rsp_valid = 0;
    if (d_req_valid && $urandom_range(2) != 0) begin
      logic we;
      logic [T-1:0] m;
      logic [T-1:0][31:0] ad, wd;
      logic [T-1:0][3:0] be;
      we = d_req_we; m = d_req_mask; ad = d_req_addr; wd = d_req_wdata; be = d_req_be;
      d_req_ready = 1;
      @(negedge clk);
      d_req_ready = 0;
      n_dreq++;
      repeat ($urandom_range(0, 5)) @(negedge clk);
      for (int t = 0; t < T; t++) begin
        d_rsp_data[t] = '0;
        if (m[t]) begin
          if (we) begin
            for (int b = 0; b < 4; b++)
              if (be[t][b]) mem[(ad[t] >> 2) % 4096][8*b +: 8] = wd[t][8*b +: 8];
          end else d_rsp_data[t] = mem[(ad[t] >> 2) % 4096];
        end
      end
      d_rsp_valid = 1;
    end
  end

  int n_evt [5];
  always @(posedge clk) if (rst_n) for (int k = 0; k < 5; k++) if (evt[k]) n_evt[k]++;

  initial begin
    logic [31:0] a [W*T], b [W*T];
    int cyc, r0;
    for (int k = 0; k < 5; k++) n_evt[k] = 0;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    for (int i = 0; i < PLEN; i++) mem[i] = prog(i);
    for (int g = 0; g < W * T; g++) begin
      a[g] = $urandom();
      b[g] = $urandom();
    end
    a[0] = 32'h8000_0000; b[0] = 32'hFFFF_FFFF;    // signed overflow
    b[1] = 32'd0;                                  // division by zero
    a[2] = 32'hFFFF_FF85; b[2] = 32'd7;            // negative dividend
    for (int g = 0; g < W * T; g++) begin
      mem[(IN >> 2) + 2 * g] = a[g];
      mem[(IN >> 2) + 2 * g + 1] = b[g];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    // halt window: nothing retires while halted (after the current instruction)
    repeat (150) @(negedge clk);
    halt = 1;
    repeat (20) @(negedge clk);
    r0 = n_evt[0];
    repeat (100) @(negedge clk);
    chk("no retire while halted", n_evt[0], r0);
    halt = 0;
    cyc = 0;
    while (!sleep && cyc < 50000) begin @(negedge clk); cyc++; end
    chk("sleep reached", 32'(sleep), 1);
    chk("not busy", 32'(busy), 0);
    for (int g = 0; g < W * T; g++) begin
      logic [31:0] r [18];
      logic [63:0] p;
      int w, t, o, s;
      w = g / T; t = g % T;
      p = $signed({{32{a[g][31]}}, a[g]}) * $signed({{32{b[g][31]}}, b[g]});
      r[0] = a[g] + b[g];
      r[1] = a[g] - b[g];
      r[2] = ($signed(a[g]) < $signed(b[g])) ? 1 : 0;
      r[3] = a[g] ^ b[g];
      r[4] = p[31:0];
      r[5] = p[63:32];
      if (b[g] == 0) r[6] = 32'hFFFF_FFFF;
      else if (a[g] == 32'h8000_0000 && b[g] == 32'hFFFF_FFFF) r[6] = 32'h8000_0000;
      else r[6] = 32'($signed(a[g]) / $signed(b[g]));
      r[7] = (b[g] == 0) ? a[g] : a[g] % b[g];
      r[8] = a[g] << b[g][4:0];
      r[9] = 32'($signed(a[g]) >>> 3);
      r[10] = (t % 2 == 1) ? a[g] : b[g];
      r[11] = 32'($signed(a[g][8 * (g % 4) +: 8]));
      r[12] = 32'(a[g][16 * (g % 2) +: 16]);
      r[13] = 60 * 4;
      r[14] = 64 * 4;
      s = 0;
      for (int k = 1; k <= w + 3; k++) s += k;
      r[15] = s;
      r[16] = CID;
      o = ((w + 1) % W) * T + t;
      r[17] = a[o] + b[o];
      for (int j = 0; j < 18; j++)
        chk($sformatf("gid %0d result %0d", g, j), mem[(RES >> 2) + 32 * g + j], r[j]);
      chk($sformatf("gid %0d byte store", g), 32'(mem[(BYT >> 2) + g / 4][8 * (g % 4) +: 8]), 32'(g + 32'h40));
    end
    begin
      string nm [5] = '{"retire", "divergent split", "barrier wait", "warp spawn", "warp switch"};
      for (int k = 0; k < 5; k++) begin
        $display("event %-16s : %0d", nm[k], n_evt[k]);
        checks++;
        if (n_evt[k] == 0) begin failures++; $display("FAIL event %s never happened", nm[k]); end
      end
    end
    chk("spawn count", n_evt[3], 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
