// rv_multdiv: RV32M multiplier and divider of the core's EX block.
//
// Combinational, one result per cycle: mul, mulh, mulhsu, mulhu, div, divu,
// rem, remu with the RISC-V rules for division by zero (quotient all ones,
// remainder the dividend) and for signed overflow (quotient -2^31,
// remainder 0).  The paper only names a Mult/Div block; a single-cycle
// implementation is this design's choice (ibex uses multi-cycle units).
module rv_multdiv
  import rv_pkg::*;
(
  input  md_op_e      op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic signed [65:0] pa, pb, prod;
  logic [31:0] q_s, r_s, q_u, r_u;
  logic ovf, dz;

  always_comb begin
    pa = (op == MD_MULHU) ? {34'd0, a} : {{34{a[31]}}, a};
    pb = (op == MD_MULHU || op == MD_MULHSU) ? {34'd0, b} : {{34{b[31]}}, b};
    prod = pa * pb;
  end

  assign dz  = (b == 32'd0);
  assign ovf = (a == 32'h8000_0000) && (b == 32'hFFFF_FFFF);

  always_comb begin
    q_u = dz ? 32'hFFFF_FFFF : a / b;
    r_u = dz ? a : a % b;
    if (dz) begin
      q_s = 32'hFFFF_FFFF;
      r_s = a;
    end else if (ovf) begin
      q_s = 32'h8000_0000;
      r_s = 32'd0;
    end else begin
      q_s = $unsigned($signed(a) / $signed(b));
      r_s = $unsigned($signed(a) % $signed(b));
    end
  end

  always_comb begin
    unique case (op)
      MD_MUL:    y = prod[31:0];
      MD_MULH, MD_MULHSU, MD_MULHU: y = prod[63:32];
      MD_DIV:    y = q_s;
      MD_DIVU:   y = q_u;
      MD_REM:    y = r_s;
      MD_REMU:   y = r_u;
      default:   y = '0;
    endcase
  end
endmodule
