// rv_asm_pkg: instruction encoders used by the testbenches to write small
// programs for the cores: the RV32I instructions the test programs need, the
// RV32D subset the FPU subsystem executes, and the frep instruction (opcode
// custom-0, rs1 = iteration count register, imm = number of FP instructions).
package rv_asm_pkg;
  function automatic logic [31:0] r_type(int f7, int rs2, int rs1, int f3, int rd, logic [6:0] opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), opc};
  endfunction
  function automatic logic [31:0] i_type(int imm, int rs1, int f3, int rd, logic [6:0] opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), opc};
  endfunction
  function automatic logic [31:0] s_type(int imm, int rs2, int rs1, int f3, logic [6:0] opc);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], opc};
  endfunction
  function automatic logic [31:0] b_type(int off, int rs2, int rs1, int f3);
    logic [12:0] o;
    o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'b1100011};
  endfunction
  // RV32I
  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return i_type(sh, rs1, 1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2);  return r_type(0, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub(int rd, int rs1, int rs2);  return r_type(32, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] lui(int rd, int imm20);         return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] lw(int rd, int rs1, int imm);   return i_type(imm, rs1, 2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sw(int rs2, int rs1, int imm);  return s_type(imm, rs2, rs1, 2, 7'b0100011); endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off)  ; return b_type(off, rs2, rs1, 0); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off)  ; return b_type(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off)  ; return b_type(off, rs2, rs1, 4); endfunction
  function automatic logic [31:0] bltu(int rs1, int rs2, int off) ; return b_type(off, rs2, rs1, 6); endfunction
  function automatic logic [31:0] jal(int rd, int off);
    logic [20:0] o;
    o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] csrr(int rd, int csr); return i_type(csr, 0, 2, rd, 7'b1110011); endfunction
  function automatic logic [31:0] fence();  return 32'h0ff0000f; endfunction
  function automatic logic [31:0] ecall();  return 32'h00000073; endfunction
  // RV32D subset
  function automatic logic [31:0] fld(int fd, int rs1, int imm);  return i_type(imm, rs1, 3, fd, 7'b0000111); endfunction
  function automatic logic [31:0] fsd(int fs2, int rs1, int imm); return s_type(imm, fs2, rs1, 3, 7'b0100111); endfunction
  function automatic logic [31:0] fmadd_d(int fd, int a, int b, int c); return {5'(c), 2'b01, 5'(b), 5'(a), 3'd0, 5'(fd), 7'b1000011}; endfunction
  function automatic logic [31:0] fmadd_s(int fd, int a, int b, int c); return {5'(c), 2'b00, 5'(b), 5'(a), 3'd0, 5'(fd), 7'b1000011}; endfunction
  function automatic logic [31:0] fadd_d(int fd, int a, int b); return r_type(32'b0000001, b, a, 0, fd, 7'b1010011); endfunction
  function automatic logic [31:0] fsub_d(int fd, int a, int b); return r_type(32'b0000101, b, a, 0, fd, 7'b1010011); endfunction
  function automatic logic [31:0] fmul_d(int fd, int a, int b); return r_type(32'b0001001, b, a, 0, fd, 7'b1010011); endfunction
  function automatic logic [31:0] fmv_d(int fd, int a);         return r_type(32'b0010001, a, a, 0, fd, 7'b1010011); endfunction
  function automatic logic [31:0] frep(int rs1, int n_instr);   return i_type(n_instr, rs1, 0, 0, 7'b0001011); endfunction
endpackage
