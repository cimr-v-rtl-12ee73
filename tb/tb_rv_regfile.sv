// tb_rv_regfile: random writes and reads of the 32 x 32 register file
// against a reference array; x0 must read zero after any write.
module tb_rv_regfile;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] raddr_a = 0, raddr_b = 0, waddr = 0;
  logic [31:0] rdata_a, rdata_b, wdata = 0;
  logic [31:0] m [32];
  int checks = 0, failures = 0;
  rv_regfile dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 32; i++) m[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      raddr_a = 5'($urandom); raddr_b = 5'($urandom); #1;
      checks++;
      if (rdata_a !== m[raddr_a] || rdata_b !== m[raddr_b]) begin failures++; $display("FAIL t=%0d", t); end
      we = $urandom_range(0, 1); waddr = 5'($urandom); wdata = $urandom;
      @(posedge clk); #1;
      if (we && waddr !== 0) m[waddr] = wdata;
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
