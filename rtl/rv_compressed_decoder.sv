// rv_compressed_decoder: expands a 16-bit RV32C instruction into the
// equivalent 32-bit RV32I instruction.
//
// Combinational.  instr_i holds the fetched word; when its two low bits are
// not 2'b11 the low half-word is a compressed instruction and instr_o is its
// 32-bit expansion.  Otherwise instr_i is passed through unchanged.
// is_compressed_o flags the 16-bit case.  illegal_o flags reserved encodings,
// the floating-point forms (no F/D here) and the RV64/RV128-only forms.
// HINT encodings (rd = x0 and the like) expand to their harmless 32-bit
// forms.
//
// The CIM-type opcode 1111110 ends in 2'b10, which the standard length rule
// would read as a 16-bit instruction.  Here a word whose low seven bits are
// 1111110 is always a 32-bit CIM instruction and passes through.  The 16-bit
// encodings with those low bits (quadrant 2 with bits [6:2] = 11111: c.slli
// by 31, c.mv / c.add / c.swsp of x31 and some c.lwsp offsets) are therefore
// not available to programs; this is this design's resolution of the clash.
//
// The paper's core figure names a "Compress Inst. Decoder" in the fetch
// stage and nothing more.  The expansion table is the standard RISC-V C
// extension.  In the core it sits after the half-word aligner that follows
// the prefetch buffer.
module rv_compressed_decoder (
  input  logic [31:0] instr_i,
  output logic [31:0] instr_o,
  output logic        is_compressed_o,
  output logic        illegal_o
);
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_CIM    = 7'b1111110;

  logic [15:0] c;
  logic [4:0]  rd_p, rs1_p, rs2_p, rd, rs2;
  logic [11:0] imm6, lw_off, lwsp_off, swsp_off, a4spn;
  logic [11:0] addi16;
  logic [20:0] j_off;
  logic [12:0] b_off;

  assign c      = instr_i[15:0];
  assign rd_p   = {2'b01, c[4:2]};
  assign rs1_p  = {2'b01, c[9:7]};
  assign rs2_p  = {2'b01, c[4:2]};
  assign rd     = c[11:7];
  assign rs2    = c[6:2];
  assign imm6   = {{7{c[12]}}, c[6:2]};
  assign lw_off   = {5'd0, c[5], c[12:10], c[6], 2'b00};
  assign lwsp_off = {4'd0, c[3:2], c[12], c[6:4], 2'b00};
  assign swsp_off = {4'd0, c[8:7], c[12:9], 2'b00};
  assign a4spn    = {2'd0, c[10:7], c[12:11], c[5], c[6], 2'b00};
  assign addi16   = {{3{c[12]}}, c[4:3], c[5], c[2], c[6], 4'b0000};
  assign j_off    = {{10{c[12]}}, c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], 1'b0};
  assign b_off    = {{5{c[12]}}, c[6:5], c[2], c[11:10], c[4:3], 1'b0};

  always_comb begin
    instr_o         = instr_i;
    is_compressed_o = (instr_i[1:0] != 2'b11) && (instr_i[6:0] != OP_CIM);
    illegal_o       = 1'b0;
    if (is_compressed_o) unique case (c[1:0])
      2'b00: unique case (c[15:13])
        3'b000: begin  // c.addi4spn
          instr_o   = {a4spn, 5'd2, 3'b000, rd_p, OP_IMM};
          illegal_o = (a4spn == 12'd0);
        end
        3'b010: instr_o = {lw_off, rs1_p, 3'b010, rd_p, OP_LOAD};               // c.lw
        3'b110: instr_o = {lw_off[11:5], rs2_p, rs1_p, 3'b010, lw_off[4:0], OP_STORE}; // c.sw
        default: illegal_o = 1'b1;
      endcase
      2'b01: unique case (c[15:13])
        3'b000: instr_o = {imm6, rd, 3'b000, rd, OP_IMM};                         // c.addi / c.nop
        3'b001, 3'b101:                                                          // c.jal / c.j
          instr_o = {j_off[20], j_off[10:1], j_off[11], j_off[19:12],
                     (c[15] ? 5'd0 : 5'd1), OP_JAL};
        3'b010: instr_o = {imm6, 5'd0, 3'b000, rd, OP_IMM};                       // c.li
        3'b011: begin
          if (rd == 5'd2) begin                                                  // c.addi16sp
            instr_o   = {addi16, 5'd2, 3'b000, 5'd2, OP_IMM};
            illegal_o = (addi16 == 12'd0);
          end else begin                                                         // c.lui
            instr_o   = {{15{c[12]}}, c[6:2], rd, OP_LUI};
            illegal_o = ({c[12], c[6:2]} == 6'd0);
          end
        end
        3'b100: unique case (c[11:10])
          2'b00: begin                                                           // c.srli
            instr_o   = {7'b0000000, c[6:2], rs1_p, 3'b101, rs1_p, OP_IMM};
            illegal_o = c[12];
          end
          2'b01: begin                                                           // c.srai
            instr_o   = {7'b0100000, c[6:2], rs1_p, 3'b101, rs1_p, OP_IMM};
            illegal_o = c[12];
          end
          2'b10: instr_o = {imm6, rs1_p, 3'b111, rs1_p, OP_IMM};                 // c.andi
          default: begin
            illegal_o = c[12];
            unique case (c[6:5])
              2'b00: instr_o = {7'b0100000, rs2_p, rs1_p, 3'b000, rs1_p, OP_REG}; // c.sub
              2'b01: instr_o = {7'b0000000, rs2_p, rs1_p, 3'b100, rs1_p, OP_REG}; // c.xor
              2'b10: instr_o = {7'b0000000, rs2_p, rs1_p, 3'b110, rs1_p, OP_REG}; // c.or
              default: instr_o = {7'b0000000, rs2_p, rs1_p, 3'b111, rs1_p, OP_REG}; // c.and
            endcase
          end
        endcase
        default:                                                                 // c.beqz / c.bnez
          instr_o = {b_off[12], b_off[10:5], 5'd0, rs1_p, 2'b00, c[13],
                     b_off[4:1], b_off[11], OP_BRANCH};
      endcase
      2'b10: unique case (c[15:13])
        3'b000: begin                                                            // c.slli
          instr_o   = {7'b0000000, c[6:2], rd, 3'b001, rd, OP_IMM};
          illegal_o = c[12];
        end
        3'b010: begin                                                            // c.lwsp
          instr_o   = {lwsp_off, 5'd2, 3'b010, rd, OP_LOAD};
          illegal_o = (rd == 5'd0);
        end
        3'b100: begin
          if (!c[12]) begin
            if (rs2 == 5'd0) begin                                               // c.jr
              instr_o   = {12'd0, rd, 3'b000, 5'd0, OP_JALR};
              illegal_o = (rd == 5'd0);
            end else begin                                                       // c.mv
              instr_o = {7'b0000000, rs2, 5'd0, 3'b000, rd, OP_REG};
            end
          end else begin
            if (rd == 5'd0 && rs2 == 5'd0)                                       // c.ebreak
              instr_o = 32'h0010_0073;
            else if (rs2 == 5'd0)                                                // c.jalr
              instr_o = {12'd0, rd, 3'b000, 5'd1, OP_JALR};
            else                                                                 // c.add
              instr_o = {7'b0000000, rs2, rd, 3'b000, rd, OP_REG};
          end
        end
        3'b110: instr_o = {swsp_off[11:5], rs2, 5'd2, 3'b010, swsp_off[4:0], OP_STORE}; // c.swsp
        default: illegal_o = 1'b1;
      endcase
      default: ;
    endcase
  end
endmodule
