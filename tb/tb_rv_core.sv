// tb_rv_core: runs a small program on the core with an instruction-memory
// and a data-memory model: a counted loop with a branch, lui/addi, word and
// byte loads and stores, mul, a CSR write of cimcfg, two CIM-type
// instructions and a jal, then a stretch of mixed 16/32-bit code (RV32C),
// ending in c.ebreak.  Random cim_stall pulses on
// memory and CIM instructions must only delay the program.  Checked: the
// stored results, the fields of each CIM request handed to the CIM control
// unit (once per instruction, whatever the stalls), and the halt.
module tb_rv_core;
  import cimrv_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0, fetch_en = 0;
  logic instr_req, data_req, data_we, data_store, cim_valid, cim_stall, halted, illegal;
  logic [31:0] instr_addr, instr_rdata, data_wdata, data_rdata;
  logic [29:0] data_addr;
  logic [3:0] data_be;
  cim_req_t cim_req;
  logic [31:0] imem [256];
  logic [31:0] dmem [1024];
  cim_req_t seen [$];
  int checks = 0, failures = 0, stalls = 0;

  rv_core dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (instr_req) instr_rdata <= imem[instr_addr[9:2]];
  assign data_rdata = dmem[data_addr[9:0]];
  always_ff @(posedge clk) begin
    if (data_we)
      for (int b = 0; b < 4; b++) if (data_be[b]) dmem[data_addr[9:0]][8*b +: 8] <= data_wdata[8*b +: 8];
    if (cim_valid && !cim_stall) seen.push_back(cim_req);
  end
  always @(negedge clk) begin
    cim_stall = (cim_valid || data_req) && ($urandom_range(0, 9) < 3);
    if (cim_stall) stalls++;
  end

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic put16(inout int h, input logic [15:0] c);
    imem[h / 2][16 * (h % 2) +: 16] = c;
    h++;
  endtask
  task automatic put32(inout int h, input logic [31:0] w);
    put16(h, w[15:0]);
    put16(h, w[31:16]);
  endtask

  initial begin
    int p = 0, h, cjal_pc;
    for (int i = 0; i < 256; i++) imem[i] = 32'h0000_0013;
    for (int i = 0; i < 1024; i++) dmem[i] = 0;
    imem[p++] = addi(1, 0, 0);
    imem[p++] = addi(2, 0, 10);
    imem[p++] = add(1, 1, 2);
    imem[p++] = addi(2, 2, -1);
    imem[p++] = bne(2, 0, -8);
    imem[p++] = sw(1, 0, 'h100);
    imem[p++] = lui(3, 'h12345);
    imem[p++] = addi(3, 3, 'h678);
    imem[p++] = sw(3, 0, 'h104);
    imem[p++] = lbu(4, 0, 'h105);
    imem[p++] = sw(4, 0, 'h108);
    imem[p++] = addi(5, 0, 7);
    imem[p++] = mul(6, 5, 1);
    imem[p++] = sw(6, 0, 'h10C);
    imem[p++] = addi(10, 0, 100);
    imem[p++] = addi(11, 0, 200);
    imem[p++] = addi(7, 0, 'h25);
    imem[p++] = csrrw(0, 'h7C0, 7);
    imem[p++] = cim(1, 0, 1, 5, 9);
    imem[p++] = cim(3, 1, 0, 300, 3);
    imem[p++] = csrrs(8, 'h7C0, 0);
    imem[p++] = sw(8, 0, 'h110);
    imem[p++] = jal(9, 8);
    imem[p++] = sw(0, 0, 'h100);
    imem[p++] = sw(9, 0, 'h114);
    // mixed 16/32-bit code: a 32-bit instruction straddling two words,
    // c.jal to a half-word address and a taken c.bnez
    h = 2 * p;
    put16(h, {3'b010, 1'b0, 5'd12, 5'd5, 2'b01});          // c.li   x12, 5
    put16(h, {3'b000, 1'b0, 5'd12, 5'd3, 2'b01});          // c.addi x12, 3
    put16(h, {3'b100, 1'b0, 5'd13, 5'd12, 2'b10});         // c.mv   x13, x12
    put32(h, addi(8, 0, 'h118));
    put16(h, {3'b100, 1'b1, 5'd13, 5'd12, 2'b10});         // c.add  x13, x12
    put16(h, {3'b000, 1'b0, 5'd13, 5'd2, 2'b10});          // c.slli x13, 2
    put16(h, {3'b110, 3'd0, 3'd0, 1'b0, 1'b0, 3'd5, 2'b00}); // c.sw x13, 0(x8)
    cjal_pc = 2 * h;
    put16(h, {3'b001, 1'b0, 1'b0, 2'b00, 1'b0, 1'b0, 1'b0, 3'b011, 1'b0, 2'b01}); // c.jal +6
    put16(h, {3'b010, 1'b0, 5'd12, 5'd0, 2'b01});          // c.li x12, 0 (skipped)
    put16(h, {3'b010, 1'b0, 5'd12, 5'd0, 2'b01});          // c.li x12, 0 (skipped)
    put32(h, sw(1, 0, 'h11C));
    put16(h, {3'b111, 1'b0, 2'b00, 3'd5, 2'b00, 2'b10, 1'b0, 2'b01}); // c.bnez x13, +4
    put16(h, {3'b010, 1'b0, 5'd12, 5'd0, 2'b01});          // c.li x12, 0 (skipped)
    put32(h, sw(12, 0, 'h120));
    put16(h, 16'h9002);                                    // c.ebreak
    repeat (2) @(posedge clk); rst_n = 1; fetch_en = 1;
    wait (halted);
    repeat (2) @(posedge clk);
    chk(dmem['h40] === 55, "loop sum");
    chk(dmem['h41] === 32'h1234_5678, "lui/addi");
    chk(dmem['h42] === 32'h56, "lbu");
    chk(dmem['h43] === 385, "mul");
    chk(dmem['h44] === 32'h25, "csr");
    chk(dmem['h45] === 92, "jal link");
    chk(dmem['h46] === 64, "compressed arithmetic and c.sw");
    chk(dmem['h47] === cjal_pc + 2, "c.jal link = pc + 2");
    chk(dmem['h48] === 8, "c.jal and c.bnez skip");
    chk(!illegal, "no error");
    chk(seen.size() === 2, "two CIM issues");
    if (seen.size() === 2) begin
      chk(seen[0].op === CIM_CONV && seen[0].src === 105 && seen[0].dst === 209 && seen[0].cfg === cim_cfg_t'(9'h25), "cim_conv req");
      chk(seen[1].op === CIM_WR && seen[1].src === 500 && seen[1].wrow === 100 && seen[1].wcol === 3, "cim_w req");
    end
    chk(stalls > 0, "stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
