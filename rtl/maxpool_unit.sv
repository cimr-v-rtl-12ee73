// maxpool_unit: binary max pooling pipelined behind the CIM convolution.
//
// With binary (0/1) activations the maximum of a window is the OR of its
// members, so the block is a bank of OR gates with a feedback register.
// Each valid input word is ORed with the running result of the current
// window; the output is the window's maximum so far, and the register is
// cleared after the last member (pool_len conv results), so the next window
// starts fresh.  When pool_en is low the mux passes the CIM output straight
// through.  Every conv result therefore leaves in the same cycle: pooling adds
// no cycles (the conv/max-pool pipeline).  The OR gates, the feedback and the
// bypass mux follow the paper's figure; the window counter is this design's
// own way of knowing where a window ends.
module maxpool_unit #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  logic             pool_en,
  input  logic [2:0]       pool_len_m1,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout,
  output logic             last     // this result closes a pooling window
);
  logic [WIDTH-1:0] acc;
  logic [2:0]       cnt;
  logic [WIDTH-1:0] ored;

  assign ored = acc | din;
  assign last = pool_en && (cnt == pool_len_m1);
  assign dout = pool_en ? ored : din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      cnt <= '0;
    end else if (valid && pool_en) begin
      if (last) begin
        acc <= '0;
        cnt <= '0;
      end else begin
        acc <= ored;
        cnt <= cnt + 3'd1;
      end
    end
  end
endmodule
