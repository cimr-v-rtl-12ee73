// rv_core: the modified two-stage RISC-V core of CIMR-V (RV32IMC + CIM-type).
//
// IF stage: PC and prefetch buffer fetching from the instruction memory,
// then a half-word aligner and the compressed-instruction decoder, so 16-bit
// RV32C instructions may be mixed freely with 32-bit ones.
// ID&EX stage: the decoder, the controller (PC redirect, stall, halt), the
// register file, the ALU, the multiplier/divider, the CSR unit, the LSU and
// the issue of CIM instructions to the CIM control unit, all in one cycle.
// Loads and stores complete in the same cycle (the data memory reads
// asynchronously); data_we is the committed store, data_store the store
// request used by the hazard check before commit.  A CIM instruction is handed to the CIM control unit on
// cim_valid with its operands computed from a0..a3 and the immediates; it
// retires in that cycle unless cim_stall (a memory hazard with a CIM result
// still in flight) holds it, which also holds loads and stores.  Taken
// branches and jumps cost one bubble.  ecall/ebreak, an illegal instruction or
// a misaligned access halt the core (halted, with illegal set for the
// error cases); there are no interrupts or traps.
//
// The paper's core is ibex on PULPissimo, extended with the CIM units; this
// is a compact re-implementation of the same structure, not ibex itself.  It
// has no debug mode and no exceptions.  The aligner keeps the upper
// half-word of a fetched word when it has not been used yet; a 32-bit
// instruction that straddles two words therefore issues as soon as the
// second word arrives, and a jump to a half-word address costs one extra
// cycle to drop the unused lower half.
module rv_core
  import cimrv_pkg::*;
  import rv_pkg::*;
#(
  parameter logic [31:0] BOOT_ADDR = 32'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fetch_en,
  // instruction memory
  output logic        instr_req,
  output logic [31:0] instr_addr,
  input  logic [31:0] instr_rdata,
  // data memory (word addressed, same-cycle read data)
  output logic        data_req,
  output logic        data_we,
  output logic        data_store,
  output logic [29:0] data_addr,
  output logic [3:0]  data_be,
  output logic [31:0] data_wdata,
  input  logic [31:0] data_rdata,
  // CIM control unit
  output logic        cim_valid,
  output cim_req_t    cim_req,
  input  logic        cim_stall,
  // status
  output logic        halted,
  output logic        illegal
);
  // --------------------------------------------------------------- IF
  logic        iv, branch;
  logic [31:0] instr, pc, target;
  logic        ready;
  logic        pv, pop;
  logic [31:0] pword, ppc;

  rv_prefetch_buffer #(.DEPTH(2), .BOOT_ADDR(BOOT_ADDR)) u_pf (
    .clk, .rst_n, .en(fetch_en && !halted), .branch, .branch_addr({target[31:2], 2'b00}),
    .mem_req(instr_req), .mem_addr(instr_addr), .mem_rdata(instr_rdata),
    .out_valid(pv), .out_instr(pword), .out_pc(ppc), .out_ready(pop));

  // Half-word aligner.  hold keeps the upper half of the last word taken
  // from the prefetch buffer when the instruction there has not been used
  // yet; skip drops the lower half of the first word after a jump to an
  // address with bit 1 set.
  logic        hv, skip, is_c, c_illegal;
  logic [15:0] hhalf;
  logic [31:0] hpc, raw;

  always_comb begin
    if (hv) begin
      raw = {pword[15:0], hhalf};
      pc  = hpc;
      iv  = is_c || pv;
      pop = ready && !is_c;
    end else begin
      raw = pword;
      pc  = {ppc[31:2], 2'b00};
      iv  = pv && !skip;
      pop = (pv && skip) || ready;
    end
  end

  rv_compressed_decoder u_cdec (.instr_i(raw), .instr_o(instr),
                                .is_compressed_o(is_c), .illegal_o(c_illegal));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hv    <= 1'b0;
      skip  <= 1'b0;
      hhalf <= '0;
      hpc   <= '0;
    end else if (branch) begin
      hv    <= 1'b0;
      skip  <= target[1];
    end else if (pop) begin
      // a word leaves the prefetch buffer: its upper half is kept unless a
      // 32-bit instruction in it was just used whole
      hv    <= hv || skip || is_c;
      skip  <= 1'b0;
      hhalf <= pword[31:16];
      hpc   <= {ppc[31:2], 2'b10};
    end else if (ready && hv) begin
      hv    <= 1'b0;               // compressed instruction from hold
    end
  end

  // --------------------------------------------------------------- ID
  dec_t d;
  rv_decoder u_dec (.instr, .d);

  logic [31:0] rs1v, rs2v, rf_wdata;
  logic        rf_we;
  rv_regfile u_rf (.clk, .rst_n, .raddr_a(d.rs1), .rdata_a(rs1v),
                   .raddr_b(d.rs2), .rdata_b(rs2v),
                   .we(rf_we), .waddr(d.rd), .wdata(rf_wdata));

  // --------------------------------------------------------------- EX
  logic [31:0] alu_y, md_y, lsu_y, csr_y;
  logic        br_taken;
  rv_alu u_alu (.op(d.alu_op), .a(d.a_pc ? pc : rs1v), .b(d.b_imm ? d.imm : rs2v),
                .y(alu_y), .br_funct3(d.funct3), .ra(rs1v), .rb(rs2v), .br_taken);

  rv_multdiv u_md (.op(d.md_op), .a(rs1v), .b(rs2v), .y(md_y));

  logic lsu_req, lsu_we, misaligned;
  rv_lsu u_lsu (.load(iv && d.load), .store(iv && d.store), .funct3(d.funct3),
                .addr(alu_y), .wdata_in(rs2v), .req(lsu_req), .we(lsu_we),
                .waddr(data_addr), .be(data_be), .wdata(data_wdata),
                .rdata(data_rdata), .result(lsu_y), .misaligned);

  logic     csr_illegal, retire, stop;
  cim_cfg_t cim_cfg;
  rv_csr u_csr (.clk, .rst_n, .en(retire && d.csr), .op(d.csr_op), .addr(d.csr_addr),
                .wdata(d.csr_imm ? {27'd0, d.rs1} : rs1v), .rdata(csr_y),
                .illegal(csr_illegal), .retire, .cim_cfg);

  // controller
  logic err;
  assign err    = d.illegal || c_illegal || (d.csr && csr_illegal) || ((d.load || d.store) && misaligned);
  assign stop   = iv && !halted && (err || d.halt);
  assign retire = iv && !halted && !stop && !cim_stall;
  assign ready  = retire;

  assign target = d.jalr ? ((rs1v + d.imm) & ~32'd1) : (pc + d.imm);
  assign branch = retire && (d.jal || d.jalr || (d.branch && br_taken));

  always_comb begin
    unique case (d.wb_sel)
      WB_LSU:  rf_wdata = lsu_y;
      WB_CSR:  rf_wdata = csr_y;
      WB_PC4:  rf_wdata = pc + (is_c ? 32'd2 : 32'd4);
      WB_MD:   rf_wdata = md_y;
      default: rf_wdata = alu_y;
    endcase
  end
  assign rf_we = retire && d.rf_we;

  assign data_req = lsu_req && !halted;
  assign data_we  = lsu_we && retire;
  assign data_store = lsu_we;      // store in EX, before the stall decision

  // CIM issue: word addresses are register + zero-extended offset
  assign cim_valid     = iv && !halted && !err && d.cim;
  assign cim_req.op    = d.cim_op;
  assign cim_req.src   = rs1v[29:0] + {21'd0, d.imm_s};
  assign cim_req.dst   = rs2v[29:0] + {21'd0, d.imm_d};
  assign cim_req.wrow  = rs2v[9:0];
  assign cim_req.wcol  = d.imm_d;
  assign cim_req.cfg   = cim_cfg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      halted  <= 1'b0;
      illegal <= 1'b0;
    end else if (stop) begin
      halted  <= 1'b1;
      illegal <= err;
    end
  end
endmodule
