// udma: micro-DMA that moves words between external memory and data memory.
//
// The core programs it through five memory-mapped registers (byte offsets
// from 0x0002_0000): SRC external byte address, DST data-memory word index,
// LEN number of words, CTRL ([0] start, [1] direction: 0 external to data
// memory, 1 data memory to external) and STATUS ([0] busy, [31:1] words
// moved by the last transfer).  Once started it runs on its own, so the core
// and the CIM keep computing while weights stream into the weight SRAM
// (weight fusion).  Each word is one request on the external port (held until
// ext_gnt, completed by ext_rvalid, one outstanding) and one access on port B
// of the data memory; a start while busy is ignored.
// The paper gives the uDMA's role (parallel weight loading without the CPU)
// and its 32-bit ports; the register set and protocol are this design's.
module udma
  import cimrv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // register port from the core (word-aligned, same-cycle read data)
  input  logic        reg_req,
  input  logic        reg_we,
  input  logic [2:0]  reg_addr,      // word offset
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  // external memory port (to the I/O interface)
  output logic        ext_req,
  output logic        ext_we,
  output logic [31:0] ext_addr,
  output logic [31:0] ext_wdata,
  input  logic        ext_gnt,
  input  logic        ext_rvalid,
  input  logic [31:0] ext_rdata,
  // data memory port B
  output logic        mem_en,
  output logic        mem_we,
  output logic [29:0] mem_addr,
  output logic [31:0] mem_wdata,
  input  logic [31:0] mem_rdata,
  output logic        busy
);
  typedef enum logic [1:0] { IDLE, REQ, WAIT } state_e;
  state_e      state;
  logic [31:0] r_src, r_dst, r_len, cur_src, done_cnt;
  logic [29:0] cur_dst;
  logic [31:0] remain;
  logic        dir;

  assign busy = (state != IDLE);

  always_comb begin
    unique case (reg_addr)
      3'd0:    reg_rdata = r_src;
      3'd1:    reg_rdata = r_dst;
      3'd2:    reg_rdata = r_len;
      3'd3:    reg_rdata = {30'd0, dir, 1'b0};
      3'd4:    reg_rdata = {done_cnt[30:0], busy};
      default: reg_rdata = 32'd0;
    endcase
  end

  assign ext_req   = (state == REQ);
  assign ext_we    = dir;
  assign ext_addr  = cur_src;
  assign ext_wdata = mem_rdata;

  assign mem_addr  = cur_dst;
  assign mem_en    = (state == REQ && dir) || (state == WAIT && !dir && ext_rvalid);
  assign mem_we    = !dir;
  assign mem_wdata = ext_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      r_src <= '0; r_dst <= '0; r_len <= '0; dir <= 1'b0;
      cur_src <= '0; cur_dst <= '0; remain <= '0; done_cnt <= '0;
    end else begin
      if (reg_req && reg_we && state == IDLE) begin
        unique case (reg_addr)
          3'd0: r_src <= reg_wdata;
          3'd1: r_dst <= reg_wdata;
          3'd2: r_len <= reg_wdata;
          3'd3: begin
            dir <= reg_wdata[1];
            if (reg_wdata[0] && r_len != 0) begin
              state    <= REQ;
              cur_src  <= r_src;
              cur_dst  <= r_dst[29:0];
              remain   <= r_len;
              done_cnt <= '0;
            end
          end
          default: ;
        endcase
      end
      unique case (state)
        REQ:  if (ext_gnt) state <= WAIT;
        WAIT: if (ext_rvalid) begin
          cur_src  <= cur_src + 32'd4;
          cur_dst  <= cur_dst + 30'd1;
          remain   <= remain - 32'd1;
          done_cnt <= done_cnt + 32'd1;
          state    <= (remain == 32'd1) ? IDLE : REQ;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && ext_rvalid)
      a_one_outstanding: assert (state == WAIT) else $error("response without an outstanding request");
  end
endmodule
