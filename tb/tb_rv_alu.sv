// tb_rv_alu: every ALU operation and every branch condition on random and
// corner-case operands, compared with results computed here.
module tb_rv_alu;
  import rv_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y, ra, rb, e;
  logic [2:0] f3;
  logic bt, eb;
  int checks = 0, failures = 0;
  rv_alu dut (.op, .a, .b, .y, .br_funct3(f3), .ra, .rb, .br_taken(bt));
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      a = (t % 5 === 0) ? 32'h8000_0000 : $urandom; b = (t % 7 === 0) ? 32'hFFFF_FFFF : $urandom;
      ra = a; rb = (t % 4 === 0) ? a : b;
      op = alu_op_e'(t % 11); f3 = 3'($urandom);
      #1;
      case (op)
        ALU_ADD: e = a + b;   ALU_SUB: e = a - b;  ALU_SLL: e = a << b[4:0];
        ALU_SLT: e = ($signed(a) < $signed(b)) ? 1 : 0;  ALU_SLTU: e = (a < b) ? 1 : 0;
        ALU_XOR: e = a ^ b;   ALU_SRL: e = a >> b[4:0];
        ALU_SRA: begin e = a >> b[4:0]; if (a[31]) e |= ~(32'hFFFF_FFFF >> b[4:0]); end
        ALU_OR:  e = a | b;   ALU_AND: e = a & b;  default: e = b;
      endcase
      case (f3)
        0: eb = ra === rb; 1: eb = ra !== rb; 4: eb = $signed(ra) < $signed(rb);
        5: eb = $signed(ra) >= $signed(rb); 6: eb = ra < rb; 7: eb = ra >= rb; default: eb = 0;
      endcase
      checks++;
      if (y !== e || bt !== eb) begin failures++; $display("FAIL op=%s a=%h b=%h y=%h e=%h", op.name(), a, b, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
