// rv_alu: RV32I arithmetic-logic unit of the core's EX block.
//
// Combinational.  It computes add, subtract, shifts, set-less-than, the
// bitwise operations and a pass of operand B (for lui), and separately the
// branch condition selected by funct3 (beq, bne, blt, bge, bltu, bgeu) from
// the two register operands.  Named in the paper; the operations are those
// of the RISC-V base ISA.
module rv_alu
  import rv_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y,
  input  logic [2:0]  br_funct3,
  input  logic [31:0] ra,
  input  logic [31:0] rb,
  output logic        br_taken
);
  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_SLL:   y = a << b[4:0];
      ALU_SLT:   y = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU:  y = {31'd0, a < b};
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> b[4:0];
      ALU_SRA:   y = $unsigned($signed(a) >>> b[4:0]);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      ALU_PASSB: y = b;
      default:   y = '0;
    endcase
  end

  always_comb begin
    unique case (br_funct3)
      3'b000:  br_taken = (ra == rb);
      3'b001:  br_taken = (ra != rb);
      3'b100:  br_taken = $signed(ra) < $signed(rb);
      3'b101:  br_taken = $signed(ra) >= $signed(rb);
      3'b110:  br_taken = ra < rb;
      3'b111:  br_taken = ra >= rb;
      default: br_taken = 1'b0;
    endcase
  end
endmodule
