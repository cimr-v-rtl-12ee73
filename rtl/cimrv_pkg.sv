// cimrv_pkg: types and constants shared by the CIMR-V RTL.
//
// It holds the CIM-type instruction encoding (opcode 7'b1111110 with the
// field layout of the instruction figure), the data-memory address map, the
// layout of the CIM configuration CSR and the AXI4-Lite structs used at the
// chip boundary.  The opcode, field positions, funct codes and memory sizes
// follow the paper; the address map, the CSR number and layout, and the use
// of AXI4-Lite are this design's own choices.
package cimrv_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned FM_WORDS    = 8192;   // 256 Kb feature-map SRAM
  localparam int unsigned W_WORDS     = 16384;  // 512 Kb weight SRAM
  localparam int unsigned IMEM_WORDS  = 4096;   // 16 KB instruction memory
  localparam int unsigned CIM_ROWS    = 1024;   // word lines
  localparam int unsigned CIM_COLS    = 512;    // bit lines
  localparam int unsigned X_IN        = 1024;   // X-mode inputs
  localparam int unsigned X_OUT       = 256;    // X-mode sense amplifiers
  localparam int unsigned Y_IN        = 512;    // Y-mode inputs
  localparam int unsigned Y_OUT       = 512;    // Y-mode sense amplifiers

  // ---------------------------------------------- data memory (word index)
  // The core, the CIM control unit and the uDMA all see one word-addressed
  // data space; the core's byte address is 4x the word index.
  localparam logic [29:0] FM_BASE_W   = 30'h0000;            // 0x0000_0000
  localparam logic [29:0] W_BASE_W    = 30'h2000;            // 0x0000_8000
  localparam logic [29:0] DMA_BASE_W  = 30'h8000;            // 0x0002_0000
  localparam logic [31:0] DMA_BASE    = 32'h0002_0000;

  // uDMA register offsets (bytes from DMA_BASE)
  localparam logic [4:0] DMA_SRC      = 5'h00;  // external byte address
  localparam logic [4:0] DMA_DST      = 5'h04;  // data-memory word index
  localparam logic [4:0] DMA_LEN      = 5'h08;  // number of words
  localparam logic [4:0] DMA_CTRL     = 5'h0C;  // [0] start, [1] dir (1: mem->ext)
  localparam logic [4:0] DMA_STATUS   = 5'h10;  // [0] busy, [31:1] words done

  // ------------------------------------------------- CIM-type instruction
  localparam logic [6:0] OPC_CIM      = 7'b1111110;
  typedef enum logic [2:0] {
    CIM_CONV = 3'b001,   // "0x01" in the instruction table
    CIM_RD   = 3'b010,   // "0x10"
    CIM_WR   = 3'b011    // "0x11"
  } cim_op_e;

  // Custom machine-mode CSR holding the CIM configuration.
  localparam logic [11:0] CSR_CIMCFG  = 12'h7C0;
  typedef struct packed {
    logic [2:0] pool_len_m1;  // [8:6] pooling window - 1
    logic       pool_en;      // [5]   route results through the max-pool block
    logic [3:0] osel;         // [4:1] 32-bit output word selected by the mux
    logic       ymode;        // [0]   0: X-mode, 1: Y-mode
  } cim_cfg_t;

  // A CIM instruction as issued by the core's EX stage.
  typedef struct packed {
    cim_op_e     op;
    logic [29:0] src;    // rs1 + imm_s   (word index / macro word line)
    logic [29:0] dst;    // rs2 + imm_d   (word index)
    logic [9:0]  wrow;   // rs2[9:0]      (cim_w word line)
    logic [8:0]  wcol;   // imm_d         (cim_w 32-bit column group)
    cim_cfg_t    cfg;
  } cim_req_t;

  // ---------------------------------------------------------- AXI4-Lite
  typedef struct packed {
    logic        aw_valid;
    logic [31:0] aw_addr;
    logic        w_valid;
    logic [31:0] w_data;
    logic [3:0]  w_strb;
    logic        b_ready;
    logic        ar_valid;
    logic [31:0] ar_addr;
    logic        r_ready;
  } axil_req_t;

  typedef struct packed {
    logic        aw_ready;
    logic        w_ready;
    logic        b_valid;
    logic [1:0]  b_resp;
    logic        ar_ready;
    logic        r_valid;
    logic [31:0] r_data;
    logic [1:0]  r_resp;
  } axil_rsp_t;

  // Host-visible registers of the I/O interface (byte addresses).
  localparam logic [31:0] HOST_IMEM_BASE = 32'h0000_0000;  // instruction memory
  localparam logic [31:0] HOST_CTRL      = 32'h0001_0000;  // [0] fetch enable
  localparam logic [31:0] HOST_STATUS    = 32'h0001_0004;  // [0] halted

endpackage
