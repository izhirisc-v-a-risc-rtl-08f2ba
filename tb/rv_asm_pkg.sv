// rv_asm_pkg: RISC-V instruction encoders for the testbenches.
// Each function returns the 32-bit machine word of one instruction, built
// from the RISC-V base formats; the neuromorphic instructions use the
// custom-0 opcode with funct3 nmldl=0, nmldh=1, nmpn=2, nmdec=3.
package rv_asm_pkg;
  function automatic logic [31:0] enc_r(int f7, int rs2, int rs1, int f3, int rd, int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] enc_i(int imm, int rs1, int f3, int rd, int opc);
    logic [11:0] m = 12'(imm);
    return {m, 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] enc_s(int imm, int rs2, int rs1, int f3, int opc);
    logic [11:0] m = 12'(imm);
    return {m[11:5], 5'(rs2), 5'(rs1), 3'(f3), m[4:0], 7'(opc)};
  endfunction
  function automatic logic [31:0] enc_b(int imm, int rs2, int rs1, int f3);
    logic [12:0] m = 13'(imm);
    return {m[12], m[10:5], 5'(rs2), 5'(rs1), 3'(f3), m[4:1], m[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] enc_u(int imm20, int rd, int opc);
    return {20'(imm20), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] enc_j(int imm, int rd);
    logic [20:0] m = 21'(imm);
    return {m[20], m[10:1], m[11], m[19:12], 5'(rd), 7'b1101111};
  endfunction

  function automatic logic [31:0] ADDI(int rd, int rs1, int imm); return enc_i(imm, rs1, 0, rd, 'h13); endfunction
  function automatic logic [31:0] SLLI(int rd, int rs1, int sh);  return enc_i(sh, rs1, 1, rd, 'h13); endfunction
  function automatic logic [31:0] SRAI(int rd, int rs1, int sh);  return enc_i(sh | 'h400, rs1, 5, rd, 'h13); endfunction
  function automatic logic [31:0] XORI_(int rd, int rs1, int imm); return enc_i(imm, rs1, 4, rd, 'h13); endfunction
  function automatic logic [31:0] OR_ (int rd, int rs1, int rs2); return enc_r(0, rs2, rs1, 6, rd, 'h33); endfunction
  function automatic logic [31:0] ADD (int rd, int rs1, int rs2); return enc_r(0, rs2, rs1, 0, rd, 'h33); endfunction
  function automatic logic [31:0] SUB (int rd, int rs1, int rs2); return enc_r('h20, rs2, rs1, 0, rd, 'h33); endfunction
  function automatic logic [31:0] XOR_(int rd, int rs1, int rs2); return enc_r(0, rs2, rs1, 4, rd, 'h33); endfunction
  function automatic logic [31:0] MUL (int rd, int rs1, int rs2); return enc_r(1, rs2, rs1, 0, rd, 'h33); endfunction
  function automatic logic [31:0] DIV (int rd, int rs1, int rs2); return enc_r(1, rs2, rs1, 4, rd, 'h33); endfunction
  function automatic logic [31:0] REM (int rd, int rs1, int rs2); return enc_r(1, rs2, rs1, 6, rd, 'h33); endfunction
  function automatic logic [31:0] LUI (int rd, int imm20);        return enc_u(imm20, rd, 'h37); endfunction
  function automatic logic [31:0] AUIPC(int rd, int imm20);       return enc_u(imm20, rd, 'h17); endfunction
  function automatic logic [31:0] LW  (int rd, int rs1, int imm); return enc_i(imm, rs1, 2, rd, 'h03); endfunction
  function automatic logic [31:0] LB  (int rd, int rs1, int imm); return enc_i(imm, rs1, 0, rd, 'h03); endfunction
  function automatic logic [31:0] LBU (int rd, int rs1, int imm); return enc_i(imm, rs1, 4, rd, 'h03); endfunction
  function automatic logic [31:0] LH  (int rd, int rs1, int imm); return enc_i(imm, rs1, 1, rd, 'h03); endfunction
  function automatic logic [31:0] SW  (int rs2, int rs1, int imm); return enc_s(imm, rs2, rs1, 2, 'h23); endfunction
  function automatic logic [31:0] SB  (int rs2, int rs1, int imm); return enc_s(imm, rs2, rs1, 0, 'h23); endfunction
  function automatic logic [31:0] SH  (int rs2, int rs1, int imm); return enc_s(imm, rs2, rs1, 1, 'h23); endfunction
  function automatic logic [31:0] BEQ (int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 0); endfunction
  function automatic logic [31:0] BNE (int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] BLT (int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 4); endfunction
  function automatic logic [31:0] BGE (int rs1, int rs2, int off); return enc_b(off, rs2, rs1, 5); endfunction
  function automatic logic [31:0] JAL (int rd, int off);           return enc_j(off, rd); endfunction
  function automatic logic [31:0] JALR(int rd, int rs1, int imm);  return enc_i(imm, rs1, 0, rd, 'h67); endfunction
  function automatic logic [31:0] NMLDL(int rd, int rs1, int rs2); return enc_r(0, rs2, rs1, 0, rd, 'h0B); endfunction
  function automatic logic [31:0] NMLDH(int rd, int rs1, int rs2); return enc_r(0, rs2, rs1, 1, rd, 'h0B); endfunction
  function automatic logic [31:0] NMPN (int rd, int rs1, int rs2); return enc_r(0, rs2, rs1, 2, rd, 'h0B); endfunction
  function automatic logic [31:0] NMDEC(int rd, int rs1, int rs2); return enc_r(0, rs2, rs1, 3, rd, 'h0B); endfunction
  localparam logic [31:0] NOP = 32'h0000_0013;
endpackage
