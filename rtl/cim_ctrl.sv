// cim_ctrl: CIM control unit and the CIM datapath around the macro.
//
// It executes the three CIM-type instructions issued by the core:
//   cim_conv  read data word [src] into the input buffer of the current mode
//             (32-bit shift), let the macro compute all SAs, latch them in the
//             output buffer, select one 32-bit word, optionally max-pool it,
//             and write it to data word [dst].
//   cim_r     latch word line src[9:0] of the macro in the output buffer and
//             write the selected 32-bit word to data word [dst].
//   cim_w     read data word [src] and write it into the macro at word line
//             wrow (rs2[9:0]), bit lines 32*wcol .. 32*wcol+31 (imm_d).
//
// Timing: a three-stage pipeline that accepts one instruction per cycle.
//   stage 0 (issue)  source word read (asynchronous port), input-buffer shift
//                    or macro weight write at the end of the cycle;
//   stage 1          macro evaluates, output buffer latches at the end;
//   stage 2          output mux, max-pool OR, result written at the end.
// So back-to-back cim_conv run at one per cycle and each result is in memory
// two cycles after issue.  stall is raised, and the core holds its
// instruction, when a load, a store or a CIM source read would touch a word
// that an instruction in stage 1 or 2 is still going to write, and for any
// store while a CIM result is pending (keeps program order on the shared
// write port).  The configuration (mode, output word, pooling) travels with
// each instruction.
//
// From the paper: the three instructions and their effect, the 32-bit paths,
// the X/Y-mode input and output buffers, the output mux and the max-pool block
// after the SAs, one instruction per cycle.  The pipeline split, the hazard
// rule, the output-word select and using only imm_d[3:0] as the cim_w column
// group are this design's choices.
module cim_ctrl
  import cimrv_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // issue from the core
  input  logic        req_valid,
  input  cim_req_t    req,
  output logic        stall,
  // core LSU access this cycle (for the hazard check)
  input  logic        lsu_req,
  input  logic        lsu_we,
  input  logic [29:0] lsu_waddr,
  // data memory read (source word) and write (result)
  output logic [29:0] rd_addr,
  input  logic [31:0] rd_data,
  output logic        wr_en,
  output logic [29:0] wr_addr,
  output logic [31:0] wr_data,
  output logic        busy
);
  localparam int unsigned XO = COLS / 2;
  localparam int unsigned YI = ROWS / 2;
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS / 32);
  localparam int unsigned XS = (XO / 32 > 1) ? $clog2(XO / 32) : 1;
  localparam int unsigned YS = (COLS / 32 > 1) ? $clog2(COLS / 32) : 1;

  typedef struct packed {
    logic        valid;
    cim_op_e     op;
    logic [29:0] dst;
    cim_cfg_t    cfg;
  } stage_t;

  stage_t s1, s2;

  // ------------------------------------------------------------ hazards
  logic s1_wr, s2_wr, rd_needed, fire;
  logic [29:0] chk_addr;
  logic        chk_en;

  assign s1_wr = s1.valid && (s1.op != CIM_WR);
  assign s2_wr = s2.valid && (s2.op != CIM_WR);
  assign rd_needed = req_valid && (req.op == CIM_CONV || req.op == CIM_WR);
  assign chk_en    = rd_needed || lsu_req;
  assign chk_addr  = rd_needed ? req.src : lsu_waddr;

  always_comb begin
    stall = 1'b0;
    if (chk_en && ((s1_wr && s1.dst == chk_addr) || (s2_wr && s2.dst == chk_addr)))
      stall = 1'b1;
    if (lsu_req && lsu_we && (s1_wr || s2_wr))
      stall = 1'b1;
  end

  assign fire    = req_valid && !stall;
  assign rd_addr = req.src;
  assign busy    = s1.valid || s2.valid;

  // ------------------------------------------------------------ stage 0
  logic [ROWS-1:0] xq;
  logic [YI-1:0]   yq;
  logic            conv0;

  assign conv0 = fire && req.op == CIM_CONV;

  cim_input_buffer #(.WIDTH(ROWS), .SHIFT(32)) u_xbuf (
    .clk, .rst_n, .clear(1'b0), .shift_en(conv0 && !req.cfg.ymode),
    .din(rd_data), .q(xq));

  cim_input_buffer #(.WIDTH(YI), .SHIFT(32)) u_ybuf (
    .clk, .rst_n, .clear(1'b0), .shift_en(conv0 && req.cfg.ymode),
    .din(rd_data), .q(yq));

  // stage-1 word line for cim_r
  logic [RW-1:0]   s1_rrow;
  logic [COLS-1:0] rdata, sa_out;

  cim_macro #(.ROWS(ROWS), .COLS(COLS)) u_macro (
    .clk,
    .we(fire && req.op == CIM_WR), .wrow(req.wrow[RW-1:0]), .wcol(req.wcol[CW-1:0]),
    .wdata(rd_data),
    .rrow(s1_rrow), .rdata,
    .ymode(s1.cfg.ymode), .x_in(xq), .y_in(yq), .sa_out);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
      s1_rrow <= '0;
    end else begin
      s1.valid <= fire;
      s1.op    <= req.op;
      s1.dst   <= req.dst;
      s1.cfg   <= req.cfg;
      s1_rrow  <= req.src[RW-1:0];
      s2       <= s1;
    end
  end

  // ------------------------------------------------------------ stage 1
  logic [COLS-1:0] s1_vec;
  logic [31:0]     xword, yword;
  logic [XO-1:0]   xbq;
  logic [COLS-1:0] ybq;

  assign s1_vec = (s1.op == CIM_RD) ? rdata : sa_out;

  cim_output_buffer #(.WIDTH(XO)) u_xobuf (
    .clk, .rst_n, .load(s1.valid && s1.op != CIM_WR && !s1.cfg.ymode),
    .din(s1_vec[XO-1:0]), .sel(s2.cfg.osel[XS-1:0]), .word(xword), .q(xbq));

  cim_output_buffer #(.WIDTH(COLS)) u_yobuf (
    .clk, .rst_n, .load(s1.valid && s1.op != CIM_WR && s1.cfg.ymode),
    .din(s1_vec), .sel(s2.cfg.osel[YS-1:0]), .word(yword), .q(ybq));

  // ------------------------------------------------------------ stage 2
  logic [31:0] omux, pooled;
  logic        pool_last;

  assign omux = s2.cfg.ymode ? yword : xword;

  maxpool_unit #(.WIDTH(32)) u_pool (
    .clk, .rst_n, .valid(s2.valid && s2.op == CIM_CONV),
    .pool_en(s2.cfg.pool_en), .pool_len_m1(s2.cfg.pool_len_m1),
    .din(omux), .dout(pooled), .last(pool_last));

  assign wr_en   = s2_wr;
  assign wr_addr = s2.dst;
  assign wr_data = (s2.op == CIM_CONV) ? pooled : omux;

  // Unused: the full output-buffer contents and the pooling-window flag are
  // only observed by testbenches.
  logic unused;
  assign unused = ^{xbq, ybq, pool_last};

  // A result is never written while an instruction reading it is accepted.
  always_ff @(posedge clk) begin
    if (rst_n && fire && rd_needed)
      a_no_raw: assert (!(s2_wr && s2.dst == req.src)) else $error("CIM source read of a pending result");
  end
endmodule
