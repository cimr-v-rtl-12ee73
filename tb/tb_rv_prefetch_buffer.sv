// tb_rv_prefetch_buffer: runs the prefetch buffer against an instruction
// memory model whose word at address A is A ^ 0x5A5A0000, with random
// back-pressure and random taken branches.  Every instruction handed out must
// carry its PC and word and follow program order (PC + 4, or the branch
// target after a branch); sequential fetch with no back-pressure must
// deliver one instruction per cycle.
module tb_rv_prefetch_buffer;
  logic clk = 0, rst_n = 0, en = 0, branch = 0, mem_req, out_valid, out_ready = 0;
  logic [31:0] branch_addr = 0, mem_addr, mem_rdata, out_instr, out_pc, exp_pc;
  int checks = 0, failures = 0, got = 0, cyc = 0;
  rv_prefetch_buffer #(.DEPTH(2)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (mem_req) mem_rdata <= mem_addr ^ 32'h5A5A_0000;
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1; en = 1; exp_pc = 0;
    // phase 1: free flow
    for (int t = 0; t < 40; t++) begin
      @(negedge clk); out_ready = 1; branch = 0; #1;
      if (out_valid) begin
        checks++; got++;
        if (out_pc !== exp_pc || out_instr !== (exp_pc ^ 32'h5A5A_0000)) begin failures++; $display("FAIL pc=%h exp=%h", out_pc, exp_pc); end
        exp_pc += 4;
      end
    end
    checks++;
    if (got < 38) begin failures++; $display("FAIL throughput %0d of 40", got); end
    // phase 2: random stalls and branches
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) !== 0);
      #1;
      branch = out_valid && out_ready && ($urandom_range(0, 6) === 0);
      branch_addr = {$urandom_range(0, 1023), 2'b00};
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (out_pc !== exp_pc || out_instr !== (exp_pc ^ 32'h5A5A_0000)) begin failures++; $display("FAIL t=%0d pc=%h exp=%h", t, out_pc, exp_pc); end
        exp_pc = branch ? branch_addr : exp_pc + 4;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
