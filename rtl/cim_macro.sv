// cim_macro: behavioural model of the 512 Kb SRAM-based CIM macro.
//
// This is a behavioural model, not synthesizable logic: the real part is an
// analog 10T-SRAM compute-in-memory macro.  The model gives its digital
// function at its ports.
//
// Array: ROWS word lines (WL) x COLS bit lines (BL), one bit per cell,
// 1024 x 512 by default.  Weights are stored with a symmetric mapping: sense
// amplifier (SA) i senses the BL pair (2i, 2i+1); a cell set on BL 2i counts
// the input as +1, a cell set on BL 2i+1 as -1, so a binary weight is stored
// as (1,0) = +1 or (0,1) = -1 and a ternary zero as (0,0).
//
//   X-mode (ymode=0): x_in[ROWS-1:0] drives all 1024 WLs; SA i (0..255) sees
//     sum_i = sum_j x_in[j]*(cell[j][2i] - cell[j][2i+1]).
//   Y-mode (ymode=1): the BLs are split into an upper half (WL 0..511) and a
//     lower half (WL 512..1023), giving 1024 BLs of 512 cells; y_in[j] drives
//     WL j and WL j+512.  SA k (0..511) senses pair p = k mod 256 in half
//     k / 256.
//
// Each SA applies ReLU and a 1-bit quantiser: sa_out = (sum > 0).  sa_out is
// combinational in this model.  Weight writes are synchronous, 32 cells at a
// time (word line wrow, bit lines 32*wcol .. 32*wcol+31).  rrow/rdata read
// the 512 cells of one word line combinationally.
//
// From the paper: the array size, the X/Y-mode input and SA counts, 1-bit
// inputs, weights and outputs, ReLU in the SA and a symmetric weight mapping.
// The BL-pair encoding, the Y-mode split and the threshold at zero are this
// model's own reading of them.
module cim_macro #(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 512,
  localparam int unsigned XO  = COLS / 2,
  localparam int unsigned YI  = ROWS / 2,
  localparam int unsigned RW  = $clog2(ROWS),
  localparam int unsigned CW  = $clog2(COLS / 32)
) (
  input  logic            clk,
  // weight write
  input  logic            we,
  input  logic [RW-1:0]   wrow,
  input  logic [CW-1:0]   wcol,
  input  logic [31:0]     wdata,
  // weight read (one word line)
  input  logic [RW-1:0]   rrow,
  output logic [COLS-1:0] rdata,
  // compute
  input  logic            ymode,
  input  logic [ROWS-1:0] x_in,
  input  logic [YI-1:0]   y_in,
  output logic [COLS-1:0] sa_out
);
  // bl[c][r] is the cell on bit line c, word line r.
  logic [ROWS-1:0] bl [COLS];

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < 32; b++) bl[32*wcol + b][wrow] <= wdata[b];
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) rdata[c] = bl[c][rrow];
  end

  always_comb begin
    int pos, neg;
    sa_out = '0;
    if (!ymode) begin
      for (int i = 0; i < XO; i++) begin
        pos = $countones(x_in & bl[2*i]);
        neg = $countones(x_in & bl[2*i+1]);
        sa_out[i] = (pos > neg);
      end
    end else begin
      for (int k = 0; k < COLS; k++) begin
        if (k < XO) begin
          pos = $countones(y_in & bl[2*k][YI-1:0]);
          neg = $countones(y_in & bl[2*k+1][YI-1:0]);
        end else begin
          pos = $countones(y_in & bl[2*(k-XO)][ROWS-1:YI]);
          neg = $countones(y_in & bl[2*(k-XO)+1][ROWS-1:YI]);
        end
        sa_out[k] = (pos > neg);
      end
    end
  end
endmodule
