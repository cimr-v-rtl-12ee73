// rv_decoder: instruction decoder of the core's ID block.
//
// Combinational.  Decodes RV32I, the RV32M extension, the Zicsr instructions,
// fence (as a no-op), ecall/ebreak (halt) and the CIM-type instruction into
// a dec_t struct.  Anything else is flagged illegal.
//
// CIM-type format (opcode 7'b1111110), bit positions as printed in the
// paper's instruction figure:
//   [31:23] imm_d[8:0]  [22:19] imm_s[8:5]  [18:17] rs2  [16:15] rs1
//   [14:12] funct       [11:7]  imm_s[4:0]  [6:0]   opcode
// funct 3'b001 cim_conv, 3'b010 cim_r, 3'b011 cim_w (the paper prints these
// as 0x01, 0x10, 0x11, read here as binary).  The 2-bit rs1/rs2 fields select
// x10..x13 (a0..a3) and both offsets are zero-extended: the paper leaves
// both open, so these are this design's choices.
module rv_decoder
  import cimrv_pkg::*;
  import rv_pkg::*;
(
  input  logic [31:0] instr,
  output dec_t        d
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opc = instr[6:0];
  assign f3  = instr[14:12];
  assign f7  = instr[31:25];
  assign imm_i = {{20{instr[31]}}, instr[31:20]};
  assign imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
  assign imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
  assign imm_u = {instr[31:12], 12'd0};
  assign imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

  function automatic alu_op_e alu_of(input logic [2:0] f, input logic alt, input logic is_reg);
    unique case (f)
      3'b000:  return (alt && is_reg) ? ALU_SUB : ALU_ADD;
      3'b001:  return ALU_SLL;
      3'b010:  return ALU_SLT;
      3'b011:  return ALU_SLTU;
      3'b100:  return ALU_XOR;
      3'b101:  return alt ? ALU_SRA : ALU_SRL;
      3'b110:  return ALU_OR;
      default: return ALU_AND;
    endcase
  endfunction

  always_comb begin
    d          = '0;
    d.rs1      = instr[19:15];
    d.rs2      = instr[24:20];
    d.rd       = instr[11:7];
    d.funct3   = f3;
    d.alu_op   = ALU_ADD;
    d.wb_sel   = WB_ALU;
    d.md_op    = md_op_e'(f3);
    d.csr_op   = csr_op_e'(f3[1:0]);
    d.csr_imm  = f3[2];
    d.csr_addr = instr[31:20];
    d.cim_op   = cim_op_e'(f3);
    d.imm_s    = {instr[22:19], instr[11:7]};
    d.imm_d    = instr[31:23];
    unique case (opc)
      7'b0110111: begin  // lui
        d.rf_we = 1'b1; d.imm = imm_u; d.b_imm = 1'b1; d.alu_op = ALU_PASSB;
      end
      7'b0010111: begin  // auipc
        d.rf_we = 1'b1; d.imm = imm_u; d.b_imm = 1'b1; d.a_pc = 1'b1;
      end
      7'b1101111: begin  // jal
        d.rf_we = 1'b1; d.jal = 1'b1; d.imm = imm_j; d.wb_sel = WB_PC4;
      end
      7'b1100111: begin  // jalr
        d.rf_we = 1'b1; d.jalr = 1'b1; d.imm = imm_i; d.wb_sel = WB_PC4;
        d.illegal = (f3 != 3'b000);
      end
      7'b1100011: begin  // branches
        d.branch = 1'b1; d.imm = imm_b;
        d.illegal = (f3 == 3'b010 || f3 == 3'b011);
      end
      7'b0000011: begin  // loads
        d.rf_we = 1'b1; d.load = 1'b1; d.imm = imm_i; d.b_imm = 1'b1; d.wb_sel = WB_LSU;
        d.illegal = (f3 == 3'b011 || f3 == 3'b110 || f3 == 3'b111);
      end
      7'b0100011: begin  // stores
        d.store = 1'b1; d.imm = imm_s; d.b_imm = 1'b1;
        d.illegal = (f3 > 3'b010);
      end
      7'b0010011: begin  // OP-IMM
        d.rf_we = 1'b1; d.imm = imm_i; d.b_imm = 1'b1;
        d.alu_op = alu_of(f3, instr[30], 1'b0);
        if (f3 == 3'b001) d.illegal = (f7 != 7'd0);
        if (f3 == 3'b101) d.illegal = (f7 != 7'd0 && f7 != 7'b0100000);
      end
      7'b0110011: begin  // OP
        d.rf_we = 1'b1;
        if (f7 == 7'b0000001) begin
          d.md = 1'b1; d.wb_sel = WB_MD;
        end else begin
          d.alu_op = alu_of(f3, instr[30], 1'b1);
          d.illegal = !(f7 == 7'd0 || (f7 == 7'b0100000 && (f3 == 3'b000 || f3 == 3'b101)));
        end
      end
      7'b0001111: ;      // fence, fence.i: no-op
      7'b1110011: begin  // SYSTEM
        if (f3 == 3'b000) begin
          d.halt    = (instr[31:7] == 25'd0) || (instr[31:7] == 25'h2000);  // ecall, ebreak
          d.illegal = !d.halt;
        end else if (f3 == 3'b100) begin
          d.illegal = 1'b1;
        end else begin
          d.csr = 1'b1; d.rf_we = 1'b1; d.wb_sel = WB_CSR;
        end
      end
      OPC_CIM: begin
        d.cim = 1'b1;
        d.rs1 = {3'b010, instr[16:15]} + 5'd2;   // x10 + rs1 field
        d.rs2 = {3'b010, instr[18:17]} + 5'd2;   // x10 + rs2 field
        d.illegal = !(f3 == CIM_CONV || f3 == CIM_RD || f3 == CIM_WR);
      end
      default: d.illegal = 1'b1;
    endcase
  end
endmodule
