// rv_asm_pkg: instruction encoders used by the testbenches to build RISC-V
// programs, including the CIM-type instruction (opcode 7'b1111110, rs1/rs2
// fields select a0..a3).
package rv_asm_pkg;
  function automatic logic [31:0] r_type(int f7, int rs2, int rs1, int f3, int rd, int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] i_type(int imm, int rs1, int f3, int rd, int opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] s_type(int imm, int rs2, int rs1, int f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_type(int off, int rs2, int rs1, int f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_type(imm, rs1, 0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return i_type(sh, rs1, 1, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add (int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub (int rd, int rs1, int rs2); return r_type(32, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sll (int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 1, rd, 7'b0110011); endfunction
  function automatic logic [31:0] slt (int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 2, rd, 7'b0110011); endfunction
  function automatic logic [31:0] xor_(int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] srl (int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 5, rd, 7'b0110011); endfunction
  function automatic logic [31:0] or_ (int rd, int rs1, int rs2); return r_type(0, rs2, rs1, 6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm); return i_type(imm, rs1, 7, rd, 7'b0010011); endfunction
  function automatic logic [31:0] bge (int rs1, int rs2, int off); return b_type(off, rs2, rs1, 5); endfunction
  function automatic logic [31:0] mul (int rd, int rs1, int rs2); return r_type(1, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] lui (int rd, int imm20);        return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] lw  (int rd, int rs1, int imm); return i_type(imm, rs1, 2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lbu (int rd, int rs1, int imm); return i_type(imm, rs1, 4, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sw  (int rs2, int rs1, int imm); return s_type(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] sb  (int rs2, int rs1, int imm); return s_type(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] beq (int rs1, int rs2, int off); return b_type(off, rs2, rs1, 0); endfunction
  function automatic logic [31:0] bne (int rs1, int rs2, int off); return b_type(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] blt (int rs1, int rs2, int off); return b_type(off, rs2, rs1, 4); endfunction
  function automatic logic [31:0] jal (int rd, int off);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] csrrw(int rd, int csr, int rs1); return i_type(csr, rs1, 1, rd, 7'b1110011); endfunction
  function automatic logic [31:0] csrrs(int rd, int csr, int rs1); return i_type(csr, rs1, 2, rd, 7'b1110011); endfunction
  function automatic logic [31:0] ebreak(); return 32'h0010_0073; endfunction
  // CIM-type: funct 1 conv, 2 read, 3 write; rs1/rs2 are 0..3 for a0..a3
  function automatic logic [31:0] cim(int funct, int rs1, int rs2, int imm_s, int imm_d);
    logic [8:0] s = 9'(imm_s), d = 9'(imm_d);
    return {d, s[8:5], 2'(rs2), 2'(rs1), 3'(funct), s[4:0], 7'b1111110};
  endfunction
endpackage
