// tb_rv_csr: read-modify-write of mscratch and cimcfg with all three CSR
// operations, the cimcfg struct output, the cycle and instret counters, and
// the illegal flag for an unknown CSR.
module tb_rv_csr;
  import rv_pkg::*;
  import cimrv_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, retire = 0, illegal;
  csr_op_e op = CSR_RW;
  logic [11:0] addr = 0;
  logic [31:0] wdata = 0, rdata, m, c0;
  cim_cfg_t cim_cfg;
  int checks = 0, failures = 0;
  rv_csr dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    m = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      addr = (t % 2) ? 12'h340 : CSR_CIMCFG;
      op = csr_op_e'($urandom_range(1, 3)); wdata = $urandom; en = 1; #1;
      if (t % 2) begin
        chk(rdata === m, "mscratch read");
        case (op) CSR_RW: m = wdata; CSR_RS: m = m | wdata; default: m = m & ~wdata; endcase
      end
      @(posedge clk); #1; en = 0;
      if (t % 2 === 0) begin
        addr = CSR_CIMCFG; #1;
        chk(rdata[31:9] === 0 && cim_cfg === cim_cfg_t'(rdata[8:0]), "cimcfg");
      end
    end
    @(negedge clk); op = CSR_RW; wdata = 32'h1A5; addr = CSR_CIMCFG; en = 1;
    @(negedge clk); en = 0;
    chk(cim_cfg.ymode === 1 && cim_cfg.osel === 4'h2 && cim_cfg.pool_en === 1 && cim_cfg.pool_len_m1 === 3'd6, "cimcfg fields");
    addr = 12'hB00; #1; c0 = rdata;
    repeat (10) @(negedge clk); #1;
    chk(rdata === c0 + 10, "mcycle");
    addr = 12'hB02; #1; c0 = rdata; retire = 1;
    repeat (7) @(negedge clk); retire = 0; #1;
    chk(rdata === c0 + 7, "minstret");
    addr = 12'h123; #1; chk(illegal, "illegal csr");
    addr = 12'h301; #1; chk(!illegal && rdata === 32'h4000_1104, "misa");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
