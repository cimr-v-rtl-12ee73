// rv_csr: control and status registers of the core.
//
// Implements the Zicsr read-modify-write (csrrw/csrrs/csrrc and their
// immediate forms, selected by op) on: mscratch (0x340), mstatus (0x300,
// plain storage), misa (0x301, read-only RV32IMC), mhartid (0xF14, zero), the
// 64-bit cycle and instret counters (0xB00/0xB80/0xB02/0xB82 and the user
// aliases 0xC00/0xC80/0xC02/0xC82, read-only here) and cimcfg (0x7C0), the
// CIM configuration: [0] Y-mode, [4:1] output word, [5] max-pool enable,
// [8:6] pooling window - 1.  rdata is the old value; the write takes effect
// at the clock edge when en is high.  Unknown addresses raise illegal.
// The paper names a CSR block that the controller updates; the register set
// and the cimcfg register are this design's choices.
module rv_csr
  import cimrv_pkg::*;
  import rv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  csr_op_e     op,
  input  logic [11:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        illegal,
  input  logic        retire,
  output cim_cfg_t    cim_cfg
);
  logic [31:0] mscratch, mstatus;
  logic [63:0] mcycle, minstret;
  logic [8:0]  cimcfg;
  logic [31:0] nval;

  always_comb begin
    illegal = 1'b0;
    unique case (addr)
      12'h300: rdata = mstatus;
      12'h301: rdata = 32'h4000_1104;               // RV32, I, M and C
      12'h340: rdata = mscratch;
      12'hF14: rdata = 32'd0;
      12'hB00, 12'hC00: rdata = mcycle[31:0];
      12'hB80, 12'hC80: rdata = mcycle[63:32];
      12'hB02, 12'hC02: rdata = minstret[31:0];
      12'hB82, 12'hC82: rdata = minstret[63:32];
      CSR_CIMCFG: rdata = {23'd0, cimcfg};
      default: begin rdata = 32'd0; illegal = 1'b1; end
    endcase
    unique case (op)
      CSR_RW:  nval = wdata;
      CSR_RS:  nval = rdata | wdata;
      CSR_RC:  nval = rdata & ~wdata;
      default: nval = rdata;
    endcase
  end

  assign cim_cfg = cim_cfg_t'(cimcfg);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mscratch <= '0; mstatus <= '0; mcycle <= '0; minstret <= '0; cimcfg <= '0;
    end else begin
      mcycle <= mcycle + 64'd1;
      if (retire) minstret <= minstret + 64'd1;
      if (en && !illegal) begin
        unique case (addr)
          12'h300:    mstatus  <= nval;
          12'h340:    mscratch <= nval;
          CSR_CIMCFG: cimcfg   <= nval[8:0];
          default: ;
        endcase
      end
    end
  end
endmodule
