// tb_cim_input_buffer: checks the 32-bit shifting input buffer at its
// default 1024-bit width against a reference vector: each shift drops the
// oldest word, keeps the rest (the overlap) and appends the new one; clear
// and reset empty it; nothing moves without shift_en.
module tb_cim_input_buffer;
  localparam int W = 1024;
  logic clk = 0, rst_n = 0, clear = 0, shift_en = 0;
  logic [31:0] din = '0;
  logic [W-1:0] q, ref_q;
  int checks = 0, failures = 0;

  cim_input_buffer #(.WIDTH(W), .SHIFT(32)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what);
    checks++;
    if (q !== ref_q) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    ref_q = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); chk("reset");
    for (int i = 0; i < 100; i++) begin
      shift_en = ($urandom_range(0, 3) !== 0);
      din = $urandom;
      @(negedge clk);
      if (shift_en) ref_q = {ref_q[W-33:0], din};
      chk("shift");
    end
    shift_en = 0; clear = 1; @(negedge clk); ref_q = '0; clear = 0; chk("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
