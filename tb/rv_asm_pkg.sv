// rv_asm_pkg: a small RV32I assembler for the testbenches, with encoders
// for the accelerator's custom instructions (buffer access and AES).
package rv_asm_pkg;
  function automatic logic [31:0] r_t(int f7, int rs2, int rs1, int f3, int rd, logic [6:0] opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), opc};
  endfunction
  function automatic logic [31:0] i_t(int imm, int rs1, int f3, int rd, logic [6:0] opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), opc};
  endfunction
  function automatic logic [31:0] s_t(int imm, int rs2, int rs1, int f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(int off, int rs2, int rs1, int f3);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] lui(int rd, int imm20);  return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] auipc(int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0010111}; endfunction
  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] xori(int rd, int rs1, int imm); return i_t(imm, rs1, 4, rd, 7'b0010011); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh); return i_t(sh, rs1, 1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] srai(int rd, int rs1, int sh); return i_t(32'h400 | sh, rs1, 5, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub(int rd, int rs1, int rs2); return r_t(32, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] slt(int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 2, rd, 7'b0110011); endfunction
  function automatic logic [31:0] and_(int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 7, rd, 7'b0110011); endfunction
  function automatic logic [31:0] or_(int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] lw(int rd, int rs1, int imm); return i_t(imm, rs1, 2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lb(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lhu(int rd, int rs1, int imm); return i_t(imm, rs1, 5, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sw(int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] sb(int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off); return b_t(off, rs2, rs1, 0); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off); return b_t(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off); return b_t(off, rs2, rs1, 4); endfunction
  function automatic logic [31:0] jal(int rd, int off);
    logic [20:0] o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] ecall(); return 32'h00000073; endfunction

  // custom instructions
  function automatic logic [31:0] buf_latch(int rs1, int rs2); return r_t(0, rs2, rs1, 0, 0, 7'b0101011); endfunction
  function automatic logic [31:0] buf_load();  return r_t(0, 0, 0, 1, 0, 7'b0101011); endfunction
  function automatic logic [31:0] buf_store(); return r_t(0, 0, 0, 2, 0, 7'b0101011); endfunction
  // ks: 0/1/2 = 128/192/256; mode: 0 ECB, 1 CFB, 2 CBC, 3 CTR; rs1 holds the block count
  function automatic logic [31:0] aes(int ks, int mode, int rs1);
    logic [6:0] opc = (ks == 0) ? 7'b0001011 : (ks == 1) ? 7'b1001011 : 7'b1101011;
    return r_t(0, 0, rs1, mode, 0, opc);
  endfunction
endpackage
