// cimrv_top: CIMR-V, a RISC-V core driving a 512 Kb SRAM compute-in-memory
// macro, with on-chip feature-map and weight SRAMs.
//
// Blocks: the I/O interface to the AXI bus (host MCU loads the program and
// starts the core; the uDMA reaches DRAM), the instruction memory, the
// RV32IMC core with CIM-type instructions, the data memory made of the 256 Kb
// FM SRAM and the 512 Kb weight SRAM behind an address decoder, the uDMA, and
// the CIM control unit with the X/Y-mode input buffers, the CIM macro, the
// X/Y-mode output buffers, the output mux and the max-pool block.
// All internal data links are 32 bits wide, as in the paper.
//
// Operation: the host writes the program over AXI4-Lite and sets fetch
// enable; the core runs it.  cim_conv/cim_r/cim_w move data between the data
// memory and the macro without the register file; the uDMA streams the next
// layer's weights from DRAM into the weight SRAM while the CIM computes
// (weight fusion), then cim_w copies them into the macro.  The host polls
// the status register for the halt.  Clock: one domain (50 MHz in the
// paper), asynchronous active-low reset.
module cimrv_top
  import cimrv_pkg::*;
#(
  parameter int unsigned IMEM_WORDS_P = IMEM_WORDS,
  parameter int unsigned FM_WORDS_P   = FM_WORDS,
  parameter int unsigned W_WORDS_P    = W_WORDS,
  parameter int unsigned CIM_ROWS_P   = CIM_ROWS,
  parameter int unsigned CIM_COLS_P   = CIM_COLS
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t host_req,
  output axil_rsp_t host_rsp,
  output axil_req_t dram_req,
  input  axil_rsp_t dram_rsp,
  output logic      core_halted
);
  localparam int unsigned IAW = $clog2(IMEM_WORDS_P);
  localparam int unsigned FAW = $clog2(FM_WORDS_P);
  localparam int unsigned WAW = $clog2(W_WORDS_P);

  // ------------------------------------------------------------ I/O
  logic           imem_we, fetch_en, core_illegal, dma_busy;
  logic [IAW-1:0] imem_waddr;
  logic [31:0]    imem_wdata;
  logic           ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0]    ext_addr, ext_wdata, ext_rdata;

  io_interface #(.IWORDS(IMEM_WORDS_P)) u_io (
    .clk, .rst_n, .host_req, .host_rsp, .dram_req, .dram_rsp,
    .imem_we, .imem_waddr, .imem_wdata, .fetch_en,
    .core_halted, .core_illegal, .dma_busy,
    .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_gnt, .ext_rvalid, .ext_rdata);

  // ------------------------------------------------------------ instruction memory
  logic        instr_req;
  logic [31:0] instr_addr, instr_rdata;

  inst_mem #(.WORDS(IMEM_WORDS_P)) u_imem (
    .clk, .req(instr_req), .addr(instr_addr[IAW+1:2]), .rdata(instr_rdata),
    .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata));

  // ------------------------------------------------------------ core
  logic        d_req, d_we, d_store;
  logic [29:0] d_addr;
  logic [3:0]  d_be;
  logic [31:0] d_wdata, d_rdata;
  logic        cim_valid, cim_stall;
  cim_req_t    cim_req;

  rv_core u_core (
    .clk, .rst_n, .fetch_en,
    .instr_req, .instr_addr, .instr_rdata,
    .data_req(d_req), .data_we(d_we), .data_store(d_store), .data_addr(d_addr),
    .data_be(d_be), .data_wdata(d_wdata), .data_rdata(d_rdata),
    .cim_valid, .cim_req, .cim_stall,
    .halted(core_halted), .illegal(core_illegal));

  // ------------------------------------------------------------ CIM
  logic [29:0] cim_rd_addr, cim_wr_addr;
  logic [31:0] cim_rd_data, cim_wr_data;
  logic        cim_wr_en, cim_busy, cim_rd_en;

  cim_ctrl #(.ROWS(CIM_ROWS_P), .COLS(CIM_COLS_P)) u_cim (
    .clk, .rst_n, .req_valid(cim_valid), .req(cim_req), .stall(cim_stall),
    .lsu_req(d_req), .lsu_we(d_store), .lsu_waddr(d_addr),
    .rd_addr(cim_rd_addr), .rd_data(cim_rd_data),
    .wr_en(cim_wr_en), .wr_addr(cim_wr_addr), .wr_data(cim_wr_data), .busy(cim_busy));

  assign cim_rd_en = cim_valid && (cim_req.op == CIM_CONV || cim_req.op == CIM_WR);

  // ------------------------------------------------------------ uDMA
  logic        reg_req, reg_we;
  logic [2:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic        dma_en, dma_we;
  logic [29:0] dma_addr;
  logic [31:0] dma_wdata, dma_rdata;

  udma u_dma (
    .clk, .rst_n, .reg_req, .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_gnt, .ext_rvalid, .ext_rdata,
    .mem_en(dma_en), .mem_we(dma_we), .mem_addr(dma_addr), .mem_wdata(dma_wdata),
    .mem_rdata(dma_rdata), .busy(dma_busy));

  // ------------------------------------------------------------ data memory
  logic [FAW-1:0] fm_raddr, fm_waddr, fm_b_addr;
  logic [31:0]    fm_rdata, fm_wdata, fm_b_wdata, fm_b_rdata;
  logic           fm_we, fm_b_en, fm_b_we;
  logic [3:0]     fm_be;
  logic [WAW-1:0] wt_raddr, wt_waddr, wt_b_addr;
  logic [31:0]    wt_rdata, wt_wdata, wt_b_wdata, wt_b_rdata;
  logic           wt_we, wt_b_en, wt_b_we;
  logic [3:0]     wt_be;

  data_xbar #(.FM_W(FM_WORDS_P), .WT_W(W_WORDS_P)) u_xbar (
    .lsu_req(d_req), .lsu_we(d_we), .lsu_addr(d_addr), .lsu_be(d_be),
    .lsu_wdata(d_wdata), .lsu_rdata(d_rdata),
    .cim_rd_en, .cim_rd_addr, .cim_rd_data, .cim_wr_en, .cim_wr_addr, .cim_wr_data,
    .dma_en, .dma_we, .dma_addr, .dma_wdata, .dma_rdata,
    .reg_req, .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .fm_raddr, .fm_rdata, .fm_we, .fm_waddr, .fm_be, .fm_wdata,
    .fm_b_en, .fm_b_we, .fm_b_addr, .fm_b_wdata, .fm_b_rdata,
    .wt_raddr, .wt_rdata, .wt_we, .wt_waddr, .wt_be, .wt_wdata,
    .wt_b_en, .wt_b_we, .wt_b_addr, .wt_b_wdata, .wt_b_rdata);

  sram_dp #(.DEPTH(FM_WORDS_P)) u_fm (
    .clk, .a_raddr(fm_raddr), .a_rdata(fm_rdata), .a_we(fm_we), .a_waddr(fm_waddr),
    .a_be(fm_be), .a_wdata(fm_wdata), .b_en(fm_b_en), .b_we(fm_b_we), .b_addr(fm_b_addr),
    .b_wdata(fm_b_wdata), .b_rdata(fm_b_rdata));

  sram_dp #(.DEPTH(W_WORDS_P)) u_wt (
    .clk, .a_raddr(wt_raddr), .a_rdata(wt_rdata), .a_we(wt_we), .a_waddr(wt_waddr),
    .a_be(wt_be), .a_wdata(wt_wdata), .b_en(wt_b_en), .b_we(wt_b_we), .b_addr(wt_b_addr),
    .b_wdata(wt_b_wdata), .b_rdata(wt_b_rdata));

  logic unused;
  assign unused = ^{cim_busy, instr_addr[31:IAW+2], instr_addr[1:0]};
endmodule
