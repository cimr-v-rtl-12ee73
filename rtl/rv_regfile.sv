// rv_regfile: the core's register file, 32 x 32 bits.
//
// Two asynchronous read ports and one synchronous write port; x0 always reads
// zero and ignores writes.  A write is visible to reads in the next cycle.
// The block is named in the paper; its organisation is the usual RV32I one.
module rv_regfile (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  raddr_a,
  output logic [31:0] rdata_a,
  input  logic [4:0]  raddr_b,
  output logic [31:0] rdata_b,
  input  logic        we,
  input  logic [4:0]  waddr,
  input  logic [31:0] wdata
);
  logic [31:0] rf [1:31];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i < 32; i++) rf[i] <= '0;
    end else if (we && waddr != 5'd0) begin
      rf[waddr] <= wdata;
    end
  end

  assign rdata_a = (raddr_a == 5'd0) ? '0 : rf[raddr_a];
  assign rdata_b = (raddr_b == 5'd0) ? '0 : rf[raddr_b];
endmodule
