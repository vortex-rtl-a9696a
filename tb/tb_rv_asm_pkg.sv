// tb_rv_asm_pkg: instruction encoders for writing test programs in SystemVerilog.
//
// Each function returns the 32-bit encoding of one RV32IM instruction or one
// of the SIMT instructions (opcode 0x6B: tmc, wspawn, split, join, bar). The
// split and join encodings reproduce the published words 0x0005206b
// ("split a0") and 0x0000306b ("join"). Register numbers follow the RISC-V
// ABI (a0 = 10 and so on).
package tb_rv_asm_pkg;

  localparam int ZERO = 0, RA = 1, SP = 2, T0 = 5, T1 = 6, T2 = 7, S0 = 8, S1 = 9;
  localparam int A0 = 10, A1 = 11, A2 = 12, A3 = 13, A4 = 14, A5 = 15, A6 = 16, A7 = 17;
  localparam int S2 = 18, S3 = 19, S4 = 20, S5 = 21, S6 = 22, S7 = 23, T3 = 28, T4 = 29, T5 = 30, T6 = 31;

  function automatic logic [31:0] r_type(int f7, int rs2, int rs1, int f3, int rd, int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] i_type(int imm, int rs1, int f3, int rd, int opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] s_type(int imm, int rs2, int rs1, int f3);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(int off, int rs2, int rs1, int f3);
    logic [12:0] i;
    i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 'h13); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return i_type(sh, rs1, 1, rd, 'h13); endfunction
  function automatic logic [31:0] srai(int rd, int rs1, int sh);  return i_type(sh | 'h400, rs1, 5, rd, 'h13); endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm); return i_type(imm, rs1, 7, rd, 'h13); endfunction
  function automatic logic [31:0] slti(int rd, int rs1, int imm); return i_type(imm, rs1, 2, rd, 'h13); endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2);  return r_type(0, rs2, rs1, 0, rd, 'h33); endfunction
  function automatic logic [31:0] sub(int rd, int rs1, int rs2);  return r_type(32, rs2, rs1, 0, rd, 'h33); endfunction
  function automatic logic [31:0] mul(int rd, int rs1, int rs2);  return r_type(1, rs2, rs1, 0, rd, 'h33); endfunction
  function automatic logic [31:0] div_(int rd, int rs1, int rs2); return r_type(1, rs2, rs1, 4, rd, 'h33); endfunction
  function automatic logic [31:0] remu(int rd, int rs1, int rs2); return r_type(1, rs2, rs1, 7, rd, 'h33); endfunction
  function automatic logic [31:0] lui(int rd, int imm20);         return {20'(imm20), 5'(rd), 7'h37}; endfunction
  function automatic logic [31:0] auipc(int rd, int imm20);       return {20'(imm20), 5'(rd), 7'h17}; endfunction
  function automatic logic [31:0] lw(int rd, int rs1, int imm);   return i_type(imm, rs1, 2, rd, 'h03); endfunction
  function automatic logic [31:0] lb(int rd, int rs1, int imm);   return i_type(imm, rs1, 0, rd, 'h03); endfunction
  function automatic logic [31:0] lhu(int rd, int rs1, int imm);  return i_type(imm, rs1, 5, rd, 'h03); endfunction
  function automatic logic [31:0] sw(int rs2, int rs1, int imm);  return s_type(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] sb(int rs2, int rs1, int imm);  return s_type(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] sh(int rs2, int rs1, int imm);  return s_type(imm, rs2, rs1, 1); endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off); return b_type(off, rs2, rs1, 0); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off); return b_type(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off); return b_type(off, rs2, rs1, 4); endfunction
  function automatic logic [31:0] jal(int rd, int off);
    logic [20:0] i;
    i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'h6F};
  endfunction
  function automatic logic [31:0] jalr(int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 'h67); endfunction
  function automatic logic [31:0] csrr(int rd, int csr);          return i_type(csr, 0, 2, rd, 'h73); endfunction

  // SIMT extension
  function automatic logic [31:0] tmc(int rs1);            return r_type(0, 0, rs1, 0, 0, 'h6B); endfunction
  function automatic logic [31:0] wspawn(int rs1, int rs2); return r_type(0, rs2, rs1, 1, 0, 'h6B); endfunction
  function automatic logic [31:0] split(int rs1);          return r_type(0, 0, rs1, 2, 0, 'h6B); endfunction
  function automatic logic [31:0] join_();                 return r_type(0, 0, 0, 3, 0, 'h6B); endfunction
  function automatic logic [31:0] bar(int rs1, int rs2);   return r_type(0, rs2, rs1, 4, 0, 'h6B); endfunction

endpackage
