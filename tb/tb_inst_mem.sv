// tb_inst_mem: writes random words into the instruction memory through its
// write port and reads them back through the synchronous fetch port,
// checking the data and its one-cycle latency.
module tb_inst_mem;
  logic clk = 0, req = 0, we = 0;
  logic [11:0] addr = 0, waddr = 0;
  logic [31:0] rdata, wdata = 0;
  logic [31:0] m [4096];
  int checks = 0, failures = 0;

  inst_mem #(.WORDS(4096)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4096; i += 7) begin
      @(negedge clk); we = 1; waddr = 12'(i); wdata = $urandom; m[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 4096; i += 7) begin
      req = 1; addr = 12'(i);
      @(negedge clk);
      checks++;
      if (rdata !== m[i]) begin failures++; $display("FAIL %0d", i); end
    end
    // no request: output holds
    req = 0; addr = 0; @(negedge clk); checks++;
    if (rdata !== m[4095 - (4095 % 7)]) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
