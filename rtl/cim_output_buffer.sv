// cim_output_buffer: CIM output buffer with 32-bit word selection.
//
// On load it latches the WIDTH sense-amplifier outputs of the CIM macro
// (X-mode 256, Y-mode 512).  The output mux reads one 32-bit word of it,
// chosen by sel, on the next cycle.  The widths follow the paper; word
// selection by a configuration field is this design's choice, as the paper
// stores "CIM_out[31:0]" without saying how other words are reached.
module cim_output_buffer #(
  parameter int unsigned WIDTH = 256,
  localparam int unsigned NW   = WIDTH / 32,
  localparam int unsigned SW   = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] din,
  input  logic [SW-1:0]    sel,
  output logic [31:0]      word,
  output logic [WIDTH-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '0;
    else if (load) q <= din;
  end
  assign word = q[32*sel +: 32];
endmodule
