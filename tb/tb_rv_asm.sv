// tb_rv_asm: instruction encoders used by the testbenches to build small
// RISC-V programs for the Azul core, including the send/recv network
// instructions (custom-0 opcode, funct3 0 and 1) and fadd.s/fmul.s on the
// integer registers. Each function returns one 32-bit instruction word;
// branch and jump offsets are in bytes.
package tb_rv_asm;
  function automatic logic [31:0] r_t(logic [6:0] f7, int rs2, int rs1, logic [2:0] f3, int rd, logic [6:0] opc);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] i_t(int imm, int rs1, logic [2:0] f3, int rd, logic [6:0] opc);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] s_t(int imm, int rs2, int rs1, logic [2:0] f3);
    logic [11:0] m;
    m = 12'(imm);
    return {m[11:5], 5'(rs2), 5'(rs1), f3, m[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(int off, int rs2, int rs1, logic [2:0] f3);
    logic [12:0] m;
    m = 13'(off);
    return {m[12], m[10:5], 5'(rs2), 5'(rs1), f3, m[4:1], m[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] ADDI(int rd, int rs1, int imm); return i_t(imm, rs1, 3'd0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ORI (int rd, int rs1, int imm); return i_t(imm, rs1, 3'd6, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(int rd, int rs1, int sh);  return i_t(sh, rs1, 3'd1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRAI(int rd, int rs1, int sh);  return i_t(sh | 32'h400, rs1, 3'd5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ADD (int rd, int rs1, int rs2); return r_t(7'd0, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB (int rd, int rs1, int rs2); return r_t(7'h20, rs2, rs1, 3'd0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLT (int rd, int rs1, int rs2); return r_t(7'd0, rs2, rs1, 3'd2, rd, 7'b0110011); endfunction
  function automatic logic [31:0] MUL_FP(int rd, int rs1, int rs2); return r_t(7'b0001000, rs2, rs1, 3'd0, rd, 7'b1010011); endfunction
  function automatic logic [31:0] ADD_FP(int rd, int rs1, int rs2); return r_t(7'b0000000, rs2, rs1, 3'd0, rd, 7'b1010011); endfunction
  function automatic logic [31:0] LUI (int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] LW  (int rd, int rs1, int imm); return i_t(imm, rs1, 3'd2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LH  (int rd, int rs1, int imm); return i_t(imm, rs1, 3'd1, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LB  (int rd, int rs1, int imm); return i_t(imm, rs1, 3'd0, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SW  (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 3'd2); endfunction
  function automatic logic [31:0] SB  (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 3'd0); endfunction
  function automatic logic [31:0] BEQ (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'd0); endfunction
  function automatic logic [31:0] BNE (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'd1); endfunction
  function automatic logic [31:0] BLT (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'd4); endfunction
  function automatic logic [31:0] BGE (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'd5); endfunction
  function automatic logic [31:0] JAL (int rd, int off);
    logic [20:0] m;
    m = 21'(off);
    return {m[20], m[10:1], m[11], m[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(int rd, int rs1, int imm); return i_t(imm, rs1, 3'd0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] RET(); return JALR(0, 1, 0); endfunction
  function automatic logic [31:0] NOP(); return ADDI(0, 0, 0); endfunction
  // send rs1 (metadata), rs2 (data)
  function automatic logic [31:0] SEND(int rs_meta, int rs_data); return r_t(7'd0, rs_data, rs_meta, 3'd0, 0, 7'b0001011); endfunction
  // recv rd (metadata), rd2 (data, in the rs2 field)
  function automatic logic [31:0] RECV(int rd_meta, int rd_data); return r_t(7'd0, rd_data, 0, 3'd1, rd_meta, 7'b0001011); endfunction
  // metadata word: row [5:0], col [11:6], type [15:12], addr [31:16]
  function automatic logic [31:0] META(int row, int col, int ttype, int addr);
    return {16'(addr), 4'(ttype), 6'(col), 6'(row)};
  endfunction
endpackage
