// rv_lsu: load store unit of the core.
//
// Combinational.  From the effective address and funct3 it forms the word
// address, the byte enables and the shifted store data for sb/sh/sw, and
// from the returned word the sign- or zero-extended load result for
// lb/lh/lw/lbu/lhu.  Misaligned half-word and word accesses raise misaligned
// (the core halts on it).  The data memory answers in the same cycle, so a
// load or store takes one cycle unless the CIM control unit stalls it.
// The paper names the LSU and its 32-bit addr/wdata/rdata ports; the rest is
// the RISC-V base ISA.
module rv_lsu (
  input  logic        load,
  input  logic        store,
  input  logic [2:0]  funct3,
  input  logic [31:0] addr,
  input  logic [31:0] wdata_in,
  output logic        req,
  output logic        we,
  output logic [29:0] waddr,
  output logic [3:0]  be,
  output logic [31:0] wdata,
  input  logic [31:0] rdata,
  output logic [31:0] result,
  output logic        misaligned
);
  logic [1:0]  off;
  logic [31:0] sh;

  assign off   = addr[1:0];
  assign waddr = addr[31:2];
  assign req   = (load || store) && !misaligned;
  assign we    = store;

  always_comb begin
    unique case (funct3[1:0])
      2'b00:   misaligned = 1'b0;
      2'b01:   misaligned = off[0];
      default: misaligned = (off != 2'b00);
    endcase
    unique case (funct3[1:0])
      2'b00:   begin be = 4'b0001 << off; wdata = {4{wdata_in[7:0]}};  end
      2'b01:   begin be = 4'b0011 << off; wdata = {2{wdata_in[15:0]}}; end
      default: begin be = 4'b1111;        wdata = wdata_in;            end
    endcase
    if (!(load || store)) be = 4'b0000;
    sh = rdata >> {off, 3'b000};
    unique case (funct3)
      3'b000:  result = {{24{sh[7]}}, sh[7:0]};
      3'b001:  result = {{16{sh[15]}}, sh[15:0]};
      3'b100:  result = {24'd0, sh[7:0]};
      3'b101:  result = {16'd0, sh[15:0]};
      default: result = rdata;
    endcase
  end
endmodule
