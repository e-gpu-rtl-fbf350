// egpu_asm_pkg: RV32IM and e-GPU SIMT instruction encoders for the testbenches.
//
// Each function returns one 32-bit instruction word. Branch and jump offsets
// are in bytes. The SIMT instructions use the custom-0 opcode with the funct3
// values of egpu_pkg.
package egpu_asm_pkg;

  localparam logic [6:0] OPC_SIMT = 7'b0001011;

  function automatic logic [31:0] enc_r(logic [6:0] f7, int rs2, int rs1, logic [2:0] f3,
                                        int rd, logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_i(int imm, int rs1, logic [2:0] f3, int rd, logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_s(int imm, int rs2, int rs1, logic [2:0] f3);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] enc_b(int imm, int rs2, int rs1, logic [2:0] f3);
    logic [12:0] i;
    i = 13'(imm);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] ADDI(int rd, int rs1, int imm); return enc_i(imm, rs1, 3'd0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ANDI(int rd, int rs1, int imm); return enc_i(imm, rs1, 3'd7, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(int rd, int rs1, int sh);  return enc_i(sh, rs1, 3'd1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRAI(int rd, int rs1, int sh);  return enc_i(sh | 32'h400, rs1, 3'd5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ADD(int rd, int rs1, int rs2);  return enc_r(7'd0, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB(int rd, int rs1, int rs2);  return enc_r(7'h20, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLL(int rd, int rs1, int rs2);  return enc_r(7'd0, rs2, rs1, 3'd1, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLT(int rd, int rs1, int rs2);  return enc_r(7'd0, rs2, rs1, 3'd2, rd, 7'b0110011); endfunction
  function automatic logic [31:0] XOR(int rd, int rs1, int rs2);  return enc_r(7'd0, rs2, rs1, 3'd4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] MUL(int rd, int rs1, int rs2);  return enc_r(7'd1, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] MULH(int rd, int rs1, int rs2); return enc_r(7'd1, rs2, rs1, 3'd1, rd, 7'b0110011); endfunction
  function automatic logic [31:0] DIV(int rd, int rs1, int rs2);  return enc_r(7'd1, rs2, rs1, 3'd4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] REMU(int rd, int rs1, int rs2); return enc_r(7'd1, rs2, rs1, 3'd7, rd, 7'b0110011); endfunction
  function automatic logic [31:0] LUI(int rd, int imm20);         return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] LW(int rd, int rs1, int imm);   return enc_i(imm, rs1, 3'd2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LB(int rd, int rs1, int imm);   return enc_i(imm, rs1, 3'd0, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LHU(int rd, int rs1, int imm);  return enc_i(imm, rs1, 3'd5, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SW(int rs2, int rs1, int imm);  return enc_s(imm, rs2, rs1, 3'd2); endfunction
  function automatic logic [31:0] SB(int rs2, int rs1, int imm);  return enc_s(imm, rs2, rs1, 3'd0); endfunction
  function automatic logic [31:0] BEQ(int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 3'd0); endfunction
  function automatic logic [31:0] BNE(int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 3'd1); endfunction
  function automatic logic [31:0] BGE(int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 3'd5); endfunction
  function automatic logic [31:0] JAL(int rd, int off);
    logic [20:0] i;
    i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(int rd, int rs1, int imm); return enc_i(imm, rs1, 3'd0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] CSRR(int rd, logic [11:0] csr); return {csr, 5'd0, 3'd2, 5'(rd), 7'b1110011}; endfunction
  function automatic logic [31:0] NOP(); return ADDI(0, 0, 0); endfunction

  // SIMT extension (custom-0)
  function automatic logic [31:0] TMC(int rs1);            return enc_r(7'd0, 0, rs1, 3'd0, 0, OPC_SIMT); endfunction
  function automatic logic [31:0] WSPAWN(int rs1, int rs2); return enc_r(7'd0, rs2, rs1, 3'd1, 0, OPC_SIMT); endfunction
  function automatic logic [31:0] SPLIT(int rs1);          return enc_r(7'd0, 0, rs1, 3'd2, 0, OPC_SIMT); endfunction
  function automatic logic [31:0] JOIN();                  return enc_r(7'd0, 0, 0, 3'd3, 0, OPC_SIMT); endfunction
  function automatic logic [31:0] BAR(int rs1, int rs2);   return enc_r(7'd0, rs2, rs1, 3'd4, 0, OPC_SIMT); endfunction
  function automatic logic [31:0] SLEEP_REQ();             return enc_r(7'd0, 0, 0, 3'd7, 0, OPC_SIMT); endfunction

  // CSR numbers (as in egpu_pkg)
  localparam logic [11:0] C_TID = 12'hCC0, C_WID = 12'hCC1, C_CID = 12'hCC2;
  localparam logic [11:0] C_NT  = 12'hFC0, C_NW  = 12'hFC1, C_NC  = 12'hFC2;

  // Test kernel, VECOP_LEN instructions, linked at address 0. Arguments at
  // ARGS: A, B, C, N, D, E (six words). Every thread gid = (core*NW + warp)*NT
  // + tid walks i = gid, gid+total, ... < N and computes
  //   C[i] = (i odd) ? A[i] - B[i] : A[i] * B[i]     (SPLIT/JOIN around it)
  //   D[i] = i (byte store)
  // then all warps of a unit meet at barrier 0, and each thread copies the C
  // element of the same thread in the next warp of its unit into E[gid]:
  //   E[gid] = C[(core*NW + (warp+1)%NW)*NT + tid]
  // Warp 0 starts alone with one thread; it spawns the other warps and every
  // warp turns on all its threads. Each warp ends with SLEEP_REQ.
  localparam int VECOP_LEN = 63;
  function automatic logic [31:0] vecop_kernel(int i, int args_hi20);
    localparam int MAIN = 4, LOOP = 28, EVEN = 39, ENDIF = 40, DONE = 47;
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
      9:  return CSRR(3, C_NT);        // again: now for every thread
      10: return CSRR(5, C_TID);
      11: return CSRR(6, C_WID);
      12: return CSRR(7, C_CID);
      13: return CSRR(8, C_NW);
      14: return CSRR(9, C_NC);
      15: return MUL(10, 7, 8);
      16: return ADD(10, 10, 6);
      17: return MUL(10, 10, 3);
      18: return ADD(10, 10, 5);
      19: return MUL(11, 9, 8);
      20: return MUL(11, 11, 3);
      21: return LUI(12, args_hi20);
      22: return LW(13, 12, 0);
      23: return LW(14, 12, 4);
      24: return LW(15, 12, 8);
      25: return LW(16, 12, 12);
      26: return LW(17, 12, 16);
      27: return ADD(18, 10, 0);
      28: return BGE(18, 16, (DONE - 28) * 4);
      29: return SLLI(19, 18, 2);
      30: return ADD(20, 13, 19);
      31: return LW(21, 20, 0);
      32: return ADD(20, 14, 19);
      33: return LW(22, 20, 0);
      34: return ANDI(23, 18, 1);
      35: return SPLIT(23);
      36: return BEQ(23, 0, (EVEN - 36) * 4);
      37: return SUB(24, 21, 22);
      38: return JAL(0, (ENDIF - 38) * 4);
      39: return MUL(24, 21, 22);
      40: return JOIN();
      41: return ADD(20, 15, 19);
      42: return SW(24, 20, 0);
      43: return ADD(20, 17, 18);
      44: return SB(18, 20, 0);
      45: return ADD(18, 18, 11);
      46: return JAL(0, (LOOP - 46) * 4);
      47: return ADDI(25, 0, 0);
      48: return BAR(25, 8);
      49: return ADDI(26, 6, 1);
      50: return REMU(26, 26, 8);
      51: return MUL(27, 7, 8);
      52: return ADD(27, 27, 26);
      53: return MUL(27, 27, 3);
      54: return ADD(27, 27, 5);
      55: return SLLI(27, 27, 2);
      56: return ADD(28, 15, 27);
      57: return LW(29, 28, 0);
      58: return LW(30, 12, 20);
      59: return SLLI(31, 10, 2);
      60: return ADD(30, 30, 31);
      61: return SW(29, 30, 0);
      62: return SLEEP_REQ();
      default: return NOP();
    endcase
  endfunction

endpackage
