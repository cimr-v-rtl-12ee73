// tb_rv_decoder: decodes hand-encoded instructions of each class, including
// the three CIM-type instructions with their split immediates and a0..a3
// register mapping, and checks the fields and flags of the result.
module tb_rv_decoder;
  import rv_pkg::*;
  import cimrv_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] instr;
  dec_t d;
  int checks = 0, failures = 0;
  rv_decoder dut (.instr, .d);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    instr = addi(5, 6, -3); #1;
    chk(d.rf_we && d.rd === 5 && d.rs1 === 6 && d.b_imm && d.imm === 32'hFFFF_FFFD && d.alu_op === ALU_ADD && !d.illegal, "addi");
    instr = sub(1, 2, 3); #1;   chk(d.alu_op === ALU_SUB && !d.b_imm && d.rs2 === 3, "sub");
    instr = mul(1, 2, 3); #1;   chk(d.md && d.md_op === MD_MUL && d.wb_sel === WB_MD, "mul");
    instr = lw(4, 2, 16); #1;   chk(d.load && d.wb_sel === WB_LSU && d.imm === 16, "lw");
    instr = sw(4, 2, -8); #1;   chk(d.store && !d.rf_we && d.imm === 32'hFFFF_FFF8, "sw");
    instr = beq(1, 2, -16); #1; chk(d.branch && d.imm === 32'hFFFF_FFF0 && d.funct3 === 0, "beq");
    instr = jal(1, 2048); #1;   chk(d.jal && d.imm === 2048 && d.wb_sel === WB_PC4, "jal");
    instr = lui(7, 20'hABCDE); #1; chk(d.alu_op === ALU_PASSB && d.imm === 32'hABCDE000, "lui");
    instr = csrrw(3, 12'h7C0, 9); #1; chk(d.csr && d.csr_op === CSR_RW && d.csr_addr === 12'h7C0, "csrrw");
    instr = ebreak(); #1;       chk(d.halt && !d.illegal, "ebreak");
    instr = 32'hFFFF_FFFF; #1;  chk(d.illegal, "illegal");
    for (int t = 0; t < 200; t++) begin
      int f = $urandom_range(1, 3), r1 = $urandom_range(0, 3), r2 = $urandom_range(0, 3);
      int s = $urandom_range(0, 511), dd = $urandom_range(0, 511);
      instr = cim(f, r1, r2, s, dd); #1;
      chk(d.cim && !d.illegal && d.cim_op === cim_op_e'(f) && d.rs1 === 5'(10 + r1) && d.rs2 === 5'(10 + r2)
          && d.imm_s === 9'(s) && d.imm_d === 9'(dd) && !d.rf_we && !d.load && !d.store, "cim");
    end
    instr = cim(5, 0, 0, 0, 0); #1; chk(d.illegal, "cim bad funct");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
