// tb_rv_compressed_decoder: checks the RV32C expansion.
//
// For every compressed instruction form the testbench draws random fields
// (registers, immediates, offsets), packs them into the 16-bit encoding the
// RISC-V C extension defines, and compares the decoder's output with the
// 32-bit instruction built from the same fields by the assembler package.
// The reference works in the encode direction, so it does not share the
// decoder's bit-slicing.  The upper half-word of the input is random in the
// compressed cases.  Reserved and illegal encodings and 32-bit pass-through
// are also checked, and so is the rule that the CIM-type opcode is always
// a 32-bit instruction.  Combinational DUT: each vector settles after #1.
module tb_rv_compressed_decoder;
  import rv_asm_pkg::*;
  logic [31:0] instr_i, instr_o;
  logic        is_c, illegal;
  int checks = 0, failures = 0;

  rv_compressed_decoder dut (.instr_i, .instr_o, .is_compressed_o(is_c), .illegal_o(illegal));

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk_c(logic [15:0] c, logic [31:0] exp, string what);
    instr_i = {16'($urandom), c}; #1;
    checks++;
    if (c[6:0] === 7'b1111110) begin   // CIM opcode: always a 32-bit instruction
      if (is_c || illegal || instr_o !== instr_i) begin
        failures++; $display("FAIL CIM pass-through %h", instr_i);
      end
    end else if (!is_c || illegal || instr_o !== exp) begin
      failures++;
      $display("FAIL %s: c=%h got %h (c=%b ill=%b) exp %h", what, c, instr_o, is_c, illegal, exp);
    end
  endtask
  task automatic chk_ill(logic [15:0] c, string what);
    instr_i = {16'($urandom), c}; #1;
    checks++;
    if (!is_c || !illegal) begin failures++; $display("FAIL illegal %s: c=%h", what, c); end
  endtask

  initial begin
    logic [11:0] u, o;
    logic [2:0]  rdp, rsp;
    logic [4:0]  rd, rs;
    int imm;
    for (int n = 0; n < 200; n++) begin
      rdp = 3'($urandom); rsp = 3'($urandom);
      rd = 5'($urandom_range(1, 31)); rs = 5'($urandom_range(1, 31));
      // quadrant 0
      u = 12'($urandom_range(1, 255) * 4);
      chk_c({3'b000, u[5:4], u[9:6], u[2], u[3], rdp, 2'b00}, addi(8 + rdp, 2, u), "c.addi4spn");
      u = 12'($urandom_range(0, 31) * 4);
      chk_c({3'b010, u[5:3], rsp, u[2], u[6], rdp, 2'b00}, lw(8 + rdp, 8 + rsp, u), "c.lw");
      chk_c({3'b110, u[5:3], rsp, u[2], u[6], rdp, 2'b00}, sw(8 + rdp, 8 + rsp, u), "c.sw");
      // quadrant 1
      imm = $urandom_range(0, 63) - 32; u = 12'(imm);
      chk_c({3'b000, u[5], rd, u[4:0], 2'b01}, addi(rd, rd, imm), "c.addi");
      chk_c({3'b010, u[5], rd, u[4:0], 2'b01}, addi(rd, 0, imm), "c.li");
      chk_c({3'b100, u[5], 2'b10, rsp, u[4:0], 2'b01}, andi(8 + rsp, 8 + rsp, imm), "c.andi");
      if (imm !== 0 && rd !== 2)
        chk_c({3'b011, u[5], rd, u[4:0], 2'b01}, lui(rd, imm & 32'hF_FFFF), "c.lui");
      imm = ($urandom_range(0, 63) - 32) * 16; o = 12'(imm);
      if (imm !== 0)
        chk_c({3'b011, o[9], 5'd2, o[4], o[6], o[8:7], o[5], 2'b01}, addi(2, 2, imm), "c.addi16sp");
      imm = ($urandom_range(0, 2047) - 1024) * 2; o = 12'(imm);
      chk_c({3'b001, o[11], o[4], o[9:8], o[10], o[6], o[7], o[3:1], o[5], 2'b01}, jal(1, imm), "c.jal");
      chk_c({3'b101, o[11], o[4], o[9:8], o[10], o[6], o[7], o[3:1], o[5], 2'b01}, jal(0, imm), "c.j");
      imm = ($urandom_range(0, 255) - 128) * 2; o = 12'(imm);
      chk_c({3'b110, o[8], o[4:3], rsp, o[7:6], o[2:1], o[5], 2'b01}, beq(8 + rsp, 0, imm), "c.beqz");
      chk_c({3'b111, o[8], o[4:3], rsp, o[7:6], o[2:1], o[5], 2'b01}, bne(8 + rsp, 0, imm), "c.bnez");
      u = 12'($urandom_range(0, 31));
      chk_c({3'b100, 1'b0, 2'b00, rsp, u[4:0], 2'b01}, i_type(u, 8 + rsp, 5, 8 + rsp, 7'b0010011), "c.srli");
      chk_c({3'b100, 1'b0, 2'b01, rsp, u[4:0], 2'b01}, i_type(u | 12'h400, 8 + rsp, 5, 8 + rsp, 7'b0010011), "c.srai");
      chk_c({3'b100, 1'b0, 2'b11, rsp, 2'b00, rdp, 2'b01}, sub(8 + rsp, 8 + rsp, 8 + rdp), "c.sub");
      chk_c({3'b100, 1'b0, 2'b11, rsp, 2'b01, rdp, 2'b01}, xor_(8 + rsp, 8 + rsp, 8 + rdp), "c.xor");
      chk_c({3'b100, 1'b0, 2'b11, rsp, 2'b10, rdp, 2'b01}, or_(8 + rsp, 8 + rsp, 8 + rdp), "c.or");
      chk_c({3'b100, 1'b0, 2'b11, rsp, 2'b11, rdp, 2'b01}, r_type(0, 8 + rdp, 8 + rsp, 7, 8 + rsp, 7'b0110011), "c.and");
      // quadrant 2
      chk_c({3'b000, 1'b0, rd, u[4:0], 2'b10}, slli(rd, rd, u), "c.slli");
      u = 12'($urandom_range(0, 63) * 4);
      chk_c({3'b010, u[5], rd, u[4:2], u[7:6], 2'b10}, lw(rd, 2, u), "c.lwsp");
      chk_c({3'b110, u[5:2], u[7:6], rs, 2'b10}, sw(rs, 2, u), "c.swsp");
      chk_c({3'b100, 1'b0, rd, 5'd0, 2'b10}, i_type(0, rd, 0, 0, 7'b1100111), "c.jr");
      chk_c({3'b100, 1'b1, rd, 5'd0, 2'b10}, i_type(0, rd, 0, 1, 7'b1100111), "c.jalr");
      chk_c({3'b100, 1'b0, rd, rs, 2'b10}, add(rd, 0, rs), "c.mv");
      chk_c({3'b100, 1'b1, rd, rs, 2'b10}, add(rd, rd, rs), "c.add");
      // 32-bit pass-through
      instr_i = {30'($urandom), 2'b11}; #1;
      checks++;
      if (is_c || illegal || instr_o !== instr_i) begin failures++; $display("FAIL pass %h -> %h", instr_i, instr_o); end
    end
    chk_c(16'h9002, ebreak(), "c.ebreak");
    chk_c({3'b100, 1'b1, 5'd3, 5'd31, 2'b10}, 0, "CIM opcode wins over c.add x3, x31");
    chk_c(16'h0001, addi(0, 0, 0), "c.nop");
    chk_ill(16'h0000, "all zero");
    chk_ill({3'b001, 11'h123, 2'b00}, "c.fld");
    chk_ill({3'b011, 11'h123, 2'b00}, "c.flw");
    chk_ill({3'b100, 11'h123, 2'b00}, "reserved q0");
    chk_ill({3'b111, 11'h123, 2'b00}, "c.fsw");
    chk_ill({3'b011, 1'b0, 5'd2, 5'd0, 2'b01}, "c.addi16sp 0");
    chk_ill({3'b011, 1'b0, 5'd5, 5'd0, 2'b01}, "c.lui 0");
    chk_ill({3'b100, 1'b1, 2'b00, 3'd1, 5'd3, 2'b01}, "c.srli shamt[5]");
    chk_ill({3'b100, 1'b1, 2'b11, 3'd1, 2'b00, 3'd2, 2'b01}, "c.subw");
    chk_ill({3'b000, 1'b1, 5'd4, 5'd3, 2'b10}, "c.slli shamt[5]");
    chk_ill({3'b010, 1'b0, 5'd0, 5'd3, 2'b10}, "c.lwsp x0");
    chk_ill({3'b100, 1'b0, 5'd0, 5'd0, 2'b10}, "c.jr x0");
    chk_ill({3'b001, 11'h055, 2'b10}, "c.fldsp");
    chk_ill({3'b111, 11'h055, 2'b10}, "c.fswsp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
