// io_interface: CIMR-V's connection to the system AXI bus.
//
// Slave side (host MCU, AXI4-Lite): a write below 0x0001_0000 goes to the
// instruction memory (word address addr[IAW+1:2]); a write to 0x0001_0000
// sets the control register ([0] fetch enable, which starts the core); a read
// of 0x0001_0000 returns the control register and of 0x0001_0004 the status
// ([0] core halted, [1] halted on an error, [2] uDMA busy).  Other reads
// return 0.  A write is taken when address and data are both valid; each
// access is answered with OKAY one cycle later.
// Master side (to the memory controller and DRAM, AXI4-Lite): one uDMA
// request at a time becomes a read (AR then R) or a write (AW and W, then B);
// ext_gnt accepts the request and ext_rvalid returns read data or signals the
// write response.
// The paper shows an I/O interface with 32-bit links to the instruction
// memory and the uDMA and an AXI bus outside; the AXI4-Lite subset, the
// register map and the handshakes are this design's choices.
module io_interface
  import cimrv_pkg::*;
#(
  parameter int unsigned IWORDS = 4096,
  localparam int unsigned IAW       = $clog2(IWORDS)
) (
  input  logic           clk,
  input  logic           rst_n,
  // host AXI4-Lite slave
  input  axil_req_t      host_req,
  output axil_rsp_t      host_rsp,
  // DRAM AXI4-Lite master
  output axil_req_t      dram_req,
  input  axil_rsp_t      dram_rsp,
  // instruction memory write port
  output logic           imem_we,
  output logic [IAW-1:0] imem_waddr,
  output logic [31:0]    imem_wdata,
  // control and status
  output logic           fetch_en,
  input  logic           core_halted,
  input  logic           core_illegal,
  input  logic           dma_busy,
  // uDMA external port
  input  logic           ext_req,
  input  logic           ext_we,
  input  logic [31:0]    ext_addr,
  input  logic [31:0]    ext_wdata,
  output logic           ext_gnt,
  output logic           ext_rvalid,
  output logic [31:0]    ext_rdata
);
  // ------------------------------------------------------------ slave
  logic        b_pend, r_pend;
  logic [31:0] r_data;
  logic        wr_take, rd_take;

  assign wr_take = host_req.aw_valid && host_req.w_valid && !b_pend;
  assign rd_take = host_req.ar_valid && !r_pend;

  always_comb begin
    host_rsp          = '0;
    host_rsp.aw_ready = wr_take;
    host_rsp.w_ready  = wr_take;
    host_rsp.b_valid  = b_pend;
    host_rsp.ar_ready = rd_take;
    host_rsp.r_valid  = r_pend;
    host_rsp.r_data   = r_data;
  end

  assign imem_we    = wr_take && host_req.aw_addr < 32'h0001_0000;
  assign imem_waddr = host_req.aw_addr[IAW+1:2];
  assign imem_wdata = host_req.w_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_pend <= 1'b0; r_pend <= 1'b0; r_data <= '0; fetch_en <= 1'b0;
    end else begin
      if (wr_take) begin
        b_pend <= 1'b1;
        if (host_req.aw_addr == HOST_CTRL && host_req.w_strb[0]) fetch_en <= host_req.w_data[0];
      end else if (b_pend && host_req.b_ready) begin
        b_pend <= 1'b0;
      end
      if (rd_take) begin
        r_pend <= 1'b1;
        unique case (host_req.ar_addr)
          HOST_CTRL:   r_data <= {31'd0, fetch_en};
          HOST_STATUS: r_data <= {29'd0, dma_busy, core_illegal, core_halted};
          default:     r_data <= 32'd0;
        endcase
      end else if (r_pend && host_req.r_ready) begin
        r_pend <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ master
  typedef enum logic [2:0] { M_IDLE, M_AR, M_R, M_AW, M_B } mstate_e;
  mstate_e     ms;
  logic [31:0] m_addr, m_data;
  logic        aw_done, w_done;

  assign ext_gnt = (ms == M_IDLE) && ext_req;

  always_comb begin
    dram_req          = '0;
    dram_req.ar_valid = (ms == M_AR);
    dram_req.ar_addr  = m_addr;
    dram_req.r_ready  = (ms == M_R);
    dram_req.aw_valid = (ms == M_AW) && !aw_done;
    dram_req.aw_addr  = m_addr;
    dram_req.w_valid  = (ms == M_AW) && !w_done;
    dram_req.w_data   = m_data;
    dram_req.w_strb   = 4'hF;
    dram_req.b_ready  = (ms == M_B);
  end

  assign ext_rvalid = (ms == M_R && dram_rsp.r_valid) || (ms == M_B && dram_rsp.b_valid);
  assign ext_rdata  = dram_rsp.r_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ms <= M_IDLE; m_addr <= '0; m_data <= '0; aw_done <= 1'b0; w_done <= 1'b0;
    end else begin
      unique case (ms)
        M_IDLE: if (ext_req) begin
          m_addr  <= ext_addr;
          m_data  <= ext_wdata;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          ms      <= ext_we ? M_AW : M_AR;
        end
        M_AR: if (dram_rsp.ar_ready) ms <= M_R;
        M_R:  if (dram_rsp.r_valid)  ms <= M_IDLE;
        M_AW: begin
          if (dram_rsp.aw_ready) aw_done <= 1'b1;
          if (dram_rsp.w_ready)  w_done  <= 1'b1;
          if ((aw_done || dram_rsp.aw_ready) && (w_done || dram_rsp.w_ready)) ms <= M_B;
        end
        M_B:  if (dram_rsp.b_valid)  ms <= M_IDLE;
        default: ms <= M_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && ms == M_IDLE)
      a_master_idle: assert (!ext_rvalid) else $error("ext_rvalid without a request");
  end
endmodule
