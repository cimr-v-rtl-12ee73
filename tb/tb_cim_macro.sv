// tb_cim_macro: fills the default 1024 x 512 macro model with random cells,
// 32 at a time, then checks word-line reads and, for random binary inputs,
// every sense-amplifier output in X-mode (256 SAs over 1024 word lines) and
// Y-mode (512 SAs over 512 word lines) against sums computed here from a
// separate copy of the cells: out = 1 when the +1 bit line of the pair
// collects more active cells than the -1 bit line.
module tb_cim_macro;
  localparam int R = 1024, C = 512;
  logic clk = 0, we = 0, ymode = 0;
  logic [9:0] wrow = 0, rrow = 0;
  logic [3:0] wcol = 0;
  logic [31:0] wdata = 0;
  logic [C-1:0] rdata, sa_out;
  logic [R-1:0] x_in = '0;
  logic [R/2-1:0] y_in = '0;
  logic [C-1:0] cells [R];
  int checks = 0, failures = 0;

  cim_macro #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic expect_bit(int k, logic ym);
    int pos = 0, neg = 0;
    if (!ym) begin
      for (int j = 0; j < R; j++) if (x_in[j]) begin pos += cells[j][2*k]; neg += cells[j][2*k+1]; end
    end else begin
      int p = k % (C/2), h = k / (C/2);
      for (int j = 0; j < R/2; j++) if (y_in[j]) begin pos += cells[j + h*R/2][2*p]; neg += cells[j + h*R/2][2*p+1]; end
    end
    return pos > neg;
  endfunction

  initial begin
    for (int r = 0; r < R; r++)
      for (int g = 0; g < C/32; g++) begin
        @(negedge clk);
        we = 1; wrow = 10'(r); wcol = 4'(g); wdata = $urandom;
        cells[r][32*g +: 32] = wdata;
      end
    @(negedge clk); we = 0;
    for (int t = 0; t < 40; t++) begin
      rrow = 10'($urandom_range(0, R-1)); #1; checks++;
      if (rdata !== cells[rrow]) begin failures++; $display("FAIL read row %0d", rrow); end
    end
    for (int t = 0; t < 6; t++) begin
      ymode = t[0];
      for (int k = 0; k < R/32; k++) x_in[32*k +: 32] = $urandom & $urandom;
      for (int k = 0; k < R/64; k++) y_in[32*k +: 32] = $urandom;
      #1;
      for (int k = 0; k < C; k++) begin
        logic e;
        e = (!ymode && k >= C/2) ? 1'b0 : expect_bit(k, ymode);
        checks++;
        if (sa_out[k] !== e) begin failures++; $display("FAIL t=%0d sa %0d", t, k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
