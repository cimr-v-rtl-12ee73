// data_xbar: address decoder and port mux of the data memory.
//
// Word-addressed map: FM SRAM at words 0x0000.., weight SRAM at 0x2000..,
// uDMA registers at 0x8000 (byte 0x0002_0000).  Port A of both SRAMs carries
// the core side: its read port is given to the CIM control unit when a CIM
// instruction reads a source word and to the LSU otherwise (never both, one
// instruction executes at a time); its write port to a CIM result when one is
// due and to a committed LSU store otherwise (the CIM control unit stalls
// stores while results are pending, so they never collide).  Port B of both
// SRAMs belongs to the uDMA.  Unmapped reads return 0, unmapped writes are
// dropped.  The split into an FM and a weight SRAM follows the paper; the
// map is this design's choice.
module data_xbar
  import cimrv_pkg::*;
#(
  parameter int unsigned FM_W = 8192,
  parameter int unsigned WT_W = 16384,
  localparam int unsigned FAW = $clog2(FM_W),
  localparam int unsigned WAW = $clog2(WT_W)
) (
  // core LSU
  input  logic           lsu_req,
  input  logic           lsu_we,
  input  logic [29:0]    lsu_addr,
  input  logic [3:0]     lsu_be,
  input  logic [31:0]    lsu_wdata,
  output logic [31:0]    lsu_rdata,
  // CIM control unit
  input  logic           cim_rd_en,
  input  logic [29:0]    cim_rd_addr,
  output logic [31:0]    cim_rd_data,
  input  logic           cim_wr_en,
  input  logic [29:0]    cim_wr_addr,
  input  logic [31:0]    cim_wr_data,
  // uDMA
  input  logic           dma_en,
  input  logic           dma_we,
  input  logic [29:0]    dma_addr,
  input  logic [31:0]    dma_wdata,
  output logic [31:0]    dma_rdata,
  // uDMA registers
  output logic           reg_req,
  output logic           reg_we,
  output logic [2:0]     reg_addr,
  output logic [31:0]    reg_wdata,
  input  logic [31:0]    reg_rdata,
  // FM SRAM
  output logic [FAW-1:0] fm_raddr,
  input  logic [31:0]    fm_rdata,
  output logic           fm_we,
  output logic [FAW-1:0] fm_waddr,
  output logic [3:0]     fm_be,
  output logic [31:0]    fm_wdata,
  output logic           fm_b_en,
  output logic           fm_b_we,
  output logic [FAW-1:0] fm_b_addr,
  output logic [31:0]    fm_b_wdata,
  input  logic [31:0]    fm_b_rdata,
  // weight SRAM
  output logic [WAW-1:0] wt_raddr,
  input  logic [31:0]    wt_rdata,
  output logic           wt_we,
  output logic [WAW-1:0] wt_waddr,
  output logic [3:0]     wt_be,
  output logic [31:0]    wt_wdata,
  output logic           wt_b_en,
  output logic           wt_b_we,
  output logic [WAW-1:0] wt_b_addr,
  output logic [31:0]    wt_b_wdata,
  input  logic [31:0]    wt_b_rdata
);
  function automatic logic is_fm(input logic [29:0] a);
    return a < 30'(FM_W);
  endfunction
  function automatic logic is_wt(input logic [29:0] a);
    return a >= W_BASE_W && a < W_BASE_W + 30'(WT_W);
  endfunction
  function automatic logic is_dma(input logic [29:0] a);
    return a[29:3] == DMA_BASE_W[29:3];
  endfunction

  logic [29:0] ra, wa, wo;
  logic [31:0] rdata, wd;
  logic [3:0]  wbe;
  logic        wen;

  // port A read
  assign ra       = cim_rd_en ? cim_rd_addr : lsu_addr;
  assign fm_raddr = ra[FAW-1:0];
  assign wo       = ra - W_BASE_W;
  assign wt_raddr = wo[WAW-1:0];
  always_comb begin
    if (is_fm(ra))                     rdata = fm_rdata;
    else if (is_wt(ra))                rdata = wt_rdata;
    else if (is_dma(ra) && !cim_rd_en) rdata = reg_rdata;
    else                               rdata = 32'd0;
  end
  assign lsu_rdata   = rdata;
  assign cim_rd_data = rdata;

  // port A write
  logic [29:0] wwo;
  assign wen      = cim_wr_en || (lsu_req && lsu_we);
  assign wa       = cim_wr_en ? cim_wr_addr : lsu_addr;
  assign wd       = cim_wr_en ? cim_wr_data : lsu_wdata;
  assign wbe      = cim_wr_en ? 4'hF : lsu_be;
  assign wwo      = wa - W_BASE_W;
  assign fm_we    = wen && is_fm(wa);
  assign fm_waddr = wa[FAW-1:0];
  assign fm_be    = wbe;
  assign fm_wdata = wd;
  assign wt_we    = wen && is_wt(wa);
  assign wt_waddr = wwo[WAW-1:0];
  assign wt_be    = wbe;
  assign wt_wdata = wd;

  // uDMA registers (core only)
  assign reg_req   = lsu_req && !cim_rd_en && is_dma(lsu_addr);
  assign reg_we    = lsu_we;
  assign reg_addr  = lsu_addr[2:0];
  assign reg_wdata = lsu_wdata;

  // port B: uDMA
  logic [29:0] dwo;
  assign dwo        = dma_addr - W_BASE_W;
  assign fm_b_en    = dma_en && is_fm(dma_addr);
  assign fm_b_we    = dma_we;
  assign fm_b_addr  = dma_addr[FAW-1:0];
  assign fm_b_wdata = dma_wdata;
  assign wt_b_en    = dma_en && is_wt(dma_addr);
  assign wt_b_we    = dma_we;
  assign wt_b_addr  = dwo[WAW-1:0];
  assign wt_b_wdata = dma_wdata;
  assign dma_rdata  = is_fm(dma_addr) ? fm_b_rdata : (is_wt(dma_addr) ? wt_b_rdata : 32'd0);
endmodule
