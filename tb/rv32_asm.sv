// rv32_asm: RV32I instruction encoders used by the controller testbenches to
// build programs in memory without an external assembler.
package rv32_asm;
  function automatic logic [31:0] r_t(int f7, int rs2, int rs1, int f3, int rd, int op);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] i_t(int imm, int rs1, int f3, int rd, int op);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'h13); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return i_t(sh, rs1, 1, rd, 7'h13); endfunction
  function automatic logic [31:0] add (int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic logic [31:0] sub (int rd, int rs1, int rs2); return r_t(32, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic logic [31:0] lw  (int rd, int rs1, int imm); return i_t(imm, rs1, 2, rd, 7'h03); endfunction
  function automatic logic [31:0] lui (int rd, int imm20);        return {20'(imm20), 5'(rd), 7'h37}; endfunction
  function automatic logic [31:0] sw  (int rs2, int rs1, int imm);
    logic [11:0] im = 12'(imm);
    return {im[11:5], 5'(rs2), 5'(rs1), 3'd2, im[4:0], 7'h23};
  endfunction
  function automatic logic [31:0] br (int f3, int rs1, int rs2, int off);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'h63};
  endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off); return br(0, rs1, rs2, off); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off); return br(1, rs1, rs2, off); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off); return br(4, rs1, rs2, off); endfunction
  function automatic logic [31:0] jal(int rd, int off);
    logic [20:0] o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'h6F};
  endfunction
  function automatic logic [31:0] csrrw(int rd, int csr, int rs1); return i_t(csr, rs1, 1, rd, 7'h73); endfunction
  function automatic logic [31:0] csrrs(int rd, int csr, int rs1); return i_t(csr, rs1, 2, rd, 7'h73); endfunction
  function automatic logic [31:0] csrrsi(int rd, int csr, int z);  return i_t(csr, z, 6, rd, 7'h73); endfunction
  function automatic logic [31:0] ecall(); return 32'h0000_0073; endfunction
  function automatic logic [31:0] mret();  return 32'h3020_0073; endfunction
endpackage
