// cim_input_buffer: CIM input buffer filled by 32-bit shifts.
//
// Each cim_conv shifts one 32-bit feature-map word into the buffer: the
// oldest 32 bits drop out at the top and the new word enters at bits
// [SHIFT-1:0].  The rest of the buffer is kept, so a row-wise convolution
// window slides by one word per instruction and the overlap between windows
// (layer fusion) is never re-read from SRAM.  The new contents are visible
// in the cycle after shift_en.  X-mode uses WIDTH 1024, Y-mode WIDTH 512;
// both widths and the 32-bit shift follow the paper, the shift direction is
// this design's choice.
module cim_input_buffer #(
  parameter int unsigned WIDTH = 1024,
  parameter int unsigned SHIFT = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             shift_en,
  input  logic [SHIFT-1:0] din,
  output logic [WIDTH-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        q <= '0;
    else if (clear)    q <= '0;
    else if (shift_en) q <= {q[WIDTH-SHIFT-1:0], din};
  end
endmodule
