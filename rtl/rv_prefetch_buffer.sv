// rv_prefetch_buffer: IF-stage prefetch buffer of the core.
//
// Keeps up to DEPTH fetched instructions, with their PCs, ahead of the ID&EX
// stage.  It requests the next sequential word from the instruction memory
// (one-cycle synchronous read) whenever the buffer, counting the request in
// flight, has room, and hands the oldest entry to ID&EX; when the buffer is
// empty the word arriving from memory is passed straight through.  A taken
// branch or jump (branch) empties the buffer, drops the word in flight and
// fetches from branch_addr in the same cycle, so the target reaches ID&EX one
// cycle later.  Sequential code therefore issues one instruction per cycle.
// The paper names the prefetch buffer; its depth and protocol are assumed.
module rv_prefetch_buffer #(
  parameter int unsigned DEPTH = 2,
  parameter logic [31:0] BOOT_ADDR = 32'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        branch,
  input  logic [31:0] branch_addr,
  // instruction memory
  output logic        mem_req,
  output logic [31:0] mem_addr,
  input  logic [31:0] mem_rdata,
  // to ID&EX
  output logic        out_valid,
  output logic [31:0] out_instr,
  output logic [31:0] out_pc,
  input  logic        out_ready
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [31:0] f_instr [DEPTH];
  logic [31:0] f_pc    [DEPTH];
  logic [CW-1:0] count, count_n;
  logic [31:0] fetch_pc, inflight_pc;
  logic        inflight;
  logic        pop, bypass, push;

  assign out_valid = (count != 0) || inflight;
  assign out_instr = (count != 0) ? f_instr[0] : mem_rdata;
  assign out_pc    = (count != 0) ? f_pc[0]    : inflight_pc;
  assign pop       = out_valid && out_ready;
  assign bypass    = (count == 0) && pop;
  assign push      = inflight && !bypass && !branch;

  always_comb begin
    if (branch) count_n = '0;
    else        count_n = count + CW'(push) - CW'(pop && count != 0);
  end

  assign mem_req  = en && (branch || (32'(count_n) < DEPTH));
  assign mem_addr = branch ? branch_addr : fetch_pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count       <= '0;
      fetch_pc    <= BOOT_ADDR;
      inflight_pc <= BOOT_ADDR;
      inflight    <= 1'b0;
      for (int i = 0; i < DEPTH; i++) begin
        f_instr[i] <= '0;
        f_pc[i]    <= '0;
      end
    end else begin
      // shift out the consumed entry, then append the arriving word
      if (!branch) begin
        if (pop && count != 0)
          for (int i = 0; i < DEPTH - 1; i++) begin
            f_instr[i] <= f_instr[i+1];
            f_pc[i]    <= f_pc[i+1];
          end
        if (push) begin
          f_instr[32'(count) - 32'(pop && count != 0)] <= mem_rdata;
          f_pc[32'(count) - 32'(pop && count != 0)]    <= inflight_pc;
        end
      end
      count    <= count_n;
      inflight <= mem_req;
      if (mem_req) begin
        inflight_pc <= mem_addr;
        fetch_pc    <= mem_addr + 32'd4;
      end else if (branch) begin
        fetch_pc    <= branch_addr;
      end
    end
  end
endmodule
