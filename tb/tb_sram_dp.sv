// tb_sram_dp: random traffic on both ports of the dual-port SRAM (default
// depth 8192, the FM SRAM) compared with a reference array: byte-enabled
// writes and asynchronous reads on port A, word reads and writes on port B,
// and port A winning a same-address write collision.
module tb_sram_dp;
  localparam int D = 8192;
  logic clk = 0;
  logic [12:0] a_raddr = 0, a_waddr = 0, b_addr = 0;
  logic [31:0] a_rdata, a_wdata = 0, b_wdata = 0, b_rdata;
  logic a_we = 0, b_en = 0, b_we = 0;
  logic [3:0] a_be = 0;
  logic [31:0] m [D];
  int checks = 0, failures = 0;

  sram_dp #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise through port B
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); b_en = 1; b_we = 1; b_addr = 13'(i); b_wdata = $urandom; m[i] = b_wdata;
    end
    @(negedge clk); b_en = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      a_we = $urandom_range(0, 1); a_waddr = 13'($urandom_range(0, 255)); a_be = 4'($urandom);
      a_wdata = $urandom; a_raddr = 13'($urandom_range(0, 255));
      b_en = $urandom_range(0, 1); b_we = $urandom_range(0, 1);
      b_addr = (t % 7 === 0) ? a_waddr : 13'($urandom_range(0, 255)); b_wdata = $urandom;
      #1;
      checks++;
      if (a_rdata !== m[a_raddr] || b_rdata !== m[b_addr]) begin
        failures++; $display("FAIL read t=%0d", t);
      end
      if (b_en && b_we && !(a_we && a_waddr === b_addr)) m[b_addr] = b_wdata;
      if (a_we) for (int b = 0; b < 4; b++) if (a_be[b]) m[a_waddr][8*b +: 8] = a_wdata[8*b +: 8];
    end
    @(negedge clk); a_we = 0; b_en = 0;
    for (int i = 0; i < 256; i++) begin
      a_raddr = 13'(i); #1; checks++;
      if (a_rdata !== m[i]) begin failures++; $display("FAIL final %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
