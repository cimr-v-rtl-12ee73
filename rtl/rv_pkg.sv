// rv_pkg: types shared by the blocks of the RISC-V core.
//
// The decoded-instruction struct and the operation enums that the decoder
// hands to the ALU, the multiplier/divider, the CSR unit, the LSU and the CIM
// issue logic.  The encodings are internal to this design.
package rv_pkg;
  import cimrv_pkg::*;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [2:0] {
    MD_MUL, MD_MULH, MD_MULHSU, MD_MULHU, MD_DIV, MD_DIVU, MD_REM, MD_REMU
  } md_op_e;

  typedef enum logic [1:0] { CSR_RW = 2'b01, CSR_RS = 2'b10, CSR_RC = 2'b11, CSR_NONE = 2'b00 } csr_op_e;

  typedef enum logic [2:0] { WB_ALU, WB_LSU, WB_CSR, WB_PC4, WB_MD } wb_sel_e;

  typedef struct packed {
    logic        illegal;
    logic        halt;        // ebreak / ecall: stop the core
    logic [4:0]  rs1, rs2, rd;
    logic        rf_we;
    logic [31:0] imm;
    logic        a_pc;        // ALU operand A is the PC
    logic        b_imm;       // ALU operand B is the immediate
    alu_op_e     alu_op;
    wb_sel_e     wb_sel;
    logic        branch;
    logic [2:0]  funct3;
    logic        jal, jalr;
    logic        load, store;
    logic        csr;
    csr_op_e     csr_op;
    logic        csr_imm;     // csrrwi / csrrsi / csrrci
    logic [11:0] csr_addr;
    logic        md;
    md_op_e      md_op;
    logic        cim;
    cim_op_e     cim_op;
    logic [8:0]  imm_s, imm_d;
  } dec_t;
endpackage
