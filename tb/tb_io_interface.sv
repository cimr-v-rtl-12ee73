// tb_io_interface: AXI4-Lite host writes to the instruction-memory port and
// the control register, host reads of control and status, and uDMA-side
// reads and writes turned into AXI4-Lite transactions on a DRAM model with
// latency.  Checks data, addresses and that each request gets one response.
module tb_io_interface;
  import cimrv_pkg::*;
  logic clk = 0, rst_n = 0;
  axil_req_t host_req, dram_req;
  axil_rsp_t host_rsp, dram_rsp;
  logic imem_we, fetch_en;
  logic [11:0] imem_waddr;
  logic [31:0] imem_wdata;
  logic core_halted = 0, core_illegal = 0, dma_busy = 0;
  logic ext_req = 0, ext_we = 0, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr = 0, ext_wdata = 0, ext_rdata, rd;
  logic [31:0] im [4096];
  int checks = 0, failures = 0;

  io_interface #(.IWORDS(4096)) dut (.*);
  axil_dram_model #(.WORDS(4096), .LAT(2)) u_dram (.clk, .rst_n, .req(dram_req), .rsp(dram_rsp));

  always #5 clk = ~clk;
  always @(posedge clk) if (imem_we) im[imem_waddr] <= imem_wdata;
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic host_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk);
    host_req.aw_valid = 1; host_req.aw_addr = a; host_req.w_valid = 1; host_req.w_data = d;
    host_req.w_strb = 4'hF; host_req.b_ready = 1;
    do @(posedge clk); while (!host_rsp.aw_ready);
    #1; host_req.aw_valid = 0; host_req.w_valid = 0;
    while (!host_rsp.b_valid) @(negedge clk);
    @(posedge clk); #1; host_req.b_ready = 0;
  endtask
  task automatic host_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    host_req.ar_valid = 1; host_req.ar_addr = a; host_req.r_ready = 1;
    do @(posedge clk); while (!host_rsp.ar_ready);
    #1; host_req.ar_valid = 0;
    while (!host_rsp.r_valid) @(negedge clk);
    d = host_rsp.r_data;
    @(posedge clk); #1; host_req.r_ready = 0;
  endtask
  task automatic ext_access(logic we, logic [31:0] a, logic [31:0] wd, output logic [31:0] d);
    @(negedge clk);
    ext_req = 1; ext_we = we; ext_addr = a; ext_wdata = wd;
    do @(posedge clk); while (!ext_gnt);
    #1; ext_req = 0;
    while (!ext_rvalid) @(negedge clk);
    d = ext_rdata;
    @(posedge clk); #1;
  endtask

  initial begin
    host_req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) host_write(32'(4 * (i * 37)), 32'hC0DE_0000 + i);
    for (int i = 0; i < 16; i++) chk(im[i * 37] === 32'hC0DE_0000 + i, "imem write");
    chk(!fetch_en, "fetch disabled");
    host_write(HOST_CTRL, 1); chk(fetch_en, "fetch enabled");
    host_read(HOST_CTRL, rd); chk(rd === 1, "ctrl read");
    core_halted = 1; core_illegal = 0; dma_busy = 1;
    host_read(HOST_STATUS, rd); chk(rd === 32'b101, "status read");
    for (int i = 0; i < 20; i++) begin
      logic [31:0] d;
      ext_access(1, 32'(4 * (100 + i)), 32'hABC0_0000 ^ i, d);
    end
    for (int i = 0; i < 20; i++) begin
      ext_access(0, 32'(4 * (100 + i)), 0, rd);
      chk(rd === (32'hABC0_0000 ^ i), "dram read back");
      chk(u_dram.mem[100 + i] === (32'hABC0_0000 ^ i), "dram content");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
