// tb_cim_output_buffer: loads random sense-amplifier vectors into a 256-bit
// (X-mode) and a 512-bit (Y-mode) output buffer and checks every 32-bit word
// the output mux can select, and that the buffer holds without load.
module tb_cim_output_buffer;
  logic clk = 0, rst_n = 0, lx = 0, ly = 0;
  logic [255:0] dx, qx, rx;
  logic [511:0] dy, qy, ry;
  logic [2:0] sx; logic [3:0] sy;
  logic [31:0] wx, wy;
  int checks = 0, failures = 0;

  cim_output_buffer #(.WIDTH(256)) ux (.clk, .rst_n, .load(lx), .din(dx), .sel(sx), .word(wx), .q(qx));
  cim_output_buffer #(.WIDTH(512)) uy (.clk, .rst_n, .load(ly), .din(dy), .sel(sy), .word(wy), .q(qy));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rx = '0; ry = '0; dx = '0; dy = '0; sx = 0; sy = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int k = 0; k < 16; k++) begin dy[32*k +: 32] = $urandom; if (k < 8) dx[32*k +: 32] = $urandom; end
      lx = (t % 3 !== 2); ly = (t % 4 !== 3);
      @(posedge clk); #1;
      if (lx) rx = dx;
      if (ly) ry = dy;
      lx = 0; ly = 0;
      for (int k = 0; k < 16; k++) begin
        sx = k[2:0]; sy = k[3:0]; #1;
        checks++;
        if (wy !== ry[32*k +: 32] || wx !== rx[32*sx +: 32]) begin
          failures++; $display("FAIL t=%0d word %0d", t, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
