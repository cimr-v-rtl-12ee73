// tb_rv_multdiv: all eight RV32M operations on random operands and on the
// special cases (division by zero, -2^31 / -1), compared with 64-bit
// arithmetic done here.
module tb_rv_multdiv;
  import rv_pkg::*;
  md_op_e op;
  logic [31:0] a, b, y, e;
  longint sa, sb, ua, ub;
  int checks = 0, failures = 0;
  rv_multdiv dut (.op, .a, .b, .y);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 4000; t++) begin
      a = (t % 9 === 0) ? 32'h8000_0000 : $urandom;
      b = (t % 13 === 0) ? 0 : ((t % 9 === 0) ? 32'hFFFF_FFFF : ((t % 3 === 0) ? 32'($urandom_range(1, 100)) : $urandom));
      op = md_op_e'(t % 8); #1;
      sa = longint'($signed(a)); sb = longint'($signed(b)); ua = longint'(a); ub = longint'(b);
      case (op)
        MD_MUL:    e = 32'(sa * sb);
        MD_MULH:   e = 32'((sa * sb) >>> 32);
        MD_MULHSU: e = 32'((sa * ub) >>> 32);
        MD_MULHU:  e = 32'((ua * ub) >> 32);
        MD_DIV:    e = (b === 0) ? 32'hFFFF_FFFF : 32'(sa / sb);
        MD_DIVU:   e = (b === 0) ? 32'hFFFF_FFFF : 32'(ua / ub);
        MD_REM:    e = (b === 0) ? a : 32'(sa % sb);
        default:   e = (b === 0) ? a : 32'(ua % ub);
      endcase
      checks++;
      if (y !== e) begin failures++; $display("FAIL %s a=%h b=%h y=%h e=%h", op.name(), a, b, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
