// inst_mem: instruction memory of CIMR-V.
//
// The core fetches through a synchronous read port: a request in one cycle
// returns the 32-bit word in the next.  The host writes the program through
// the I/O interface on a separate write port.  The paper names the block and
// its 32-bit ports; its size (4096 words, 16 KB) and ports are assumed.
module inst_mem #(
  parameter int unsigned WORDS = 4096,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          req,
  input  logic [AW-1:0] addr,
  output logic [31:0]   rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (req) rdata <= mem[addr];
  end
endmodule
