// tb_maxpool_unit: drives random binary conv results through the max-pool
// block for window lengths 1..8 and with pooling off, and checks each output
// against the OR of the window so far, the window-end flag, and that the
// bypass passes the input unchanged.
module tb_maxpool_unit;
  logic clk = 0, rst_n = 0, valid = 0, pool_en = 0, last;
  logic [2:0] plm1 = 0;
  logic [31:0] din = 0, dout, acc;
  int checks = 0, failures = 0;

  maxpool_unit #(.WIDTH(32)) dut (.clk, .rst_n, .valid, .pool_en, .pool_len_m1(plm1), .din, .dout, .last);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int len = 1; len <= 8; len++) begin
      plm1 = 3'(len - 1); pool_en = 1;
      for (int w = 0; w < 6; w++) begin
        acc = '0;
        for (int i = 0; i < len; i++) begin
          valid = 1; din = $urandom & $urandom;  // sparse bits
          acc |= din;
          #1;
          checks++;
          if (dout !== acc || last !== (i === len - 1)) begin
            failures++; $display("FAIL len=%0d i=%0d dout=%h exp=%h", len, i, dout, acc);
          end
          @(negedge clk);
          // an idle cycle inside a window must not disturb it
          if (i === 0 && len > 1) begin valid = 0; din = $urandom; @(negedge clk); end
        end
      end
    end
    pool_en = 0;
    for (int i = 0; i < 10; i++) begin
      valid = 1; din = $urandom; #1; checks++;
      if (dout !== din) begin failures++; $display("FAIL bypass"); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
