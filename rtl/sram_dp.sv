// sram_dp: dual-port word memory used for the 256 Kb feature-map SRAM
// (DEPTH 8192) and the 512 Kb weight SRAM (DEPTH 16384).
//
// Port A serves the core side: one asynchronous read (LSU load or CIM source
// word) and one synchronous write with byte enables (LSU store or CIM result)
// in the same cycle.  Port B serves the uDMA: one access per cycle, read
// (asynchronous) or write (synchronous, full word).  If both ports write the
// same word in one cycle, port A wins.
//
// The sizes follow the paper.  The paper does not describe the SRAM ports;
// the two-port organisation that lets the uDMA fill the weight SRAM while the
// CIM computes (weight fusion) is this design's choice, written as an array.
module sram_dp #(
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // port A
  input  logic [AW-1:0] a_raddr,
  output logic [31:0]   a_rdata,
  input  logic          a_we,
  input  logic [AW-1:0] a_waddr,
  input  logic [3:0]    a_be,
  input  logic [31:0]   a_wdata,
  // port B
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);
  logic [31:0] mem [DEPTH];

  assign a_rdata = mem[a_raddr];
  assign b_rdata = mem[b_addr];

  always_ff @(posedge clk) begin
    if (b_en && b_we && !(a_we && a_waddr == b_addr)) mem[b_addr] <= b_wdata;
    if (a_we) begin
      for (int b = 0; b < 4; b++)
        if (a_be[b]) mem[a_waddr][8*b +: 8] <= a_wdata[8*b +: 8];
    end
  end
endmodule
