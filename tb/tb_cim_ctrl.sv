// tb_cim_ctrl: the CIM control unit with the full-size macro (1024 x 512)
// against a reference model kept here.  It loads every macro cell with
// cim_w from a data-memory model, then issues back-to-back cim_conv in
// X-mode and Y-mode with various output words, cim_conv with max pooling
// (windows of 2..4 results written to one address) and cim_r.  Every result
// write is checked for address, data and its timing: two cycles after the
// instruction was accepted (seen at the falling edge after the next
// rising edge), with one instruction accepted per cycle.  The
// hazard rules are checked too: a load or a CIM source read of a pending
// result, and a store while a result is pending, must stall.
module tb_cim_ctrl;
  import cimrv_pkg::*;
  localparam int R = 1024, C = 512;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, stall, lsu_req = 0, lsu_we = 0, wr_en, busy;
  cim_req_t req;
  logic [29:0] lsu_waddr = 0, rd_addr, wr_addr;
  logic [31:0] rd_data, wr_data;
  logic [31:0] dmem [32768];
  logic [C-1:0] cells [R];
  logic [R-1:0] xb;
  logic [R/2-1:0] yb;
  logic [31:0] pacc;
  int pcnt;
  typedef struct { int cyc; logic [29:0] a; logic [31:0] d; } wr_t;
  wr_t expq [$];
  int cyc = 0, checks = 0, failures = 0, fired = 0, stall_seen = 0;

  cim_ctrl #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  assign rd_data = dmem[rd_addr[14:0]];

  initial begin
    repeat (60000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // result monitor
  always @(negedge clk) if (rst_n && wr_en) begin
    checks++;
    if (expq.size() === 0) begin failures++; $display("FAIL unexpected write"); end
    else begin
      wr_t e;
      e = expq.pop_front();
      if (e.a !== wr_addr || e.d !== wr_data || e.cyc + 1 !== cyc) begin
        failures++; $display("FAIL write a=%h d=%h cyc=%0d exp a=%h d=%h cyc=%0d", wr_addr, wr_data, cyc, e.a, e.d, e.cyc + 1);
      end
    end
  end

  function automatic logic [C-1:0] ref_sa(logic ym);
    logic [C-1:0] o = '0;
    for (int k = 0; k < (ym ? C : C/2); k++) begin
      int pos = 0, neg = 0;
      if (!ym) begin
        for (int j = 0; j < R; j++) if (xb[j]) begin pos += cells[j][2*k]; neg += cells[j][2*k+1]; end
      end else begin
        int p = k % (C/2), h = k / (C/2);
        for (int j = 0; j < R/2; j++) if (yb[j]) begin pos += cells[j + h*R/2][2*p]; neg += cells[j + h*R/2][2*p+1]; end
      end
      o[k] = pos > neg;
    end
    return o;
  endfunction

  function automatic void push_exp(logic [29:0] a, logic [31:0] d);
    wr_t e;
    e.cyc = cyc; e.a = a; e.d = d;
    expq.push_back(e);
  endfunction

  // issue one instruction; waits for acceptance and updates the model
  task automatic issue(cim_req_t r);
    @(negedge clk);
    req = r; req_valid = 1;
    #1;
    while (stall) begin stall_seen++; @(negedge clk); #1; end
    @(posedge clk); #1;
    fired++;
    case (r.op)
      CIM_WR: cells[r.wrow][32*r.wcol[3:0] +: 32] = dmem[r.src[14:0]];
      CIM_CONV: begin
        logic [C-1:0] o; logic [31:0] w;
        if (!r.cfg.ymode) xb = {xb[R-33:0], dmem[r.src[14:0]]};
        else              yb = {yb[R/2-33:0], dmem[r.src[14:0]]};
        o = ref_sa(r.cfg.ymode);
        w = r.cfg.ymode ? o[32*r.cfg.osel +: 32] : o[32*r.cfg.osel[2:0] +: 32];
        if (r.cfg.pool_en) begin
          pacc |= w; w = pacc; pcnt++;
          if (pcnt === int'(r.cfg.pool_len_m1) + 1) begin pacc = 0; pcnt = 0; end
        end
        push_exp(r.dst, w);
      end
      default: begin
        logic [C-1:0] row = cells[r.src[9:0]];
        push_exp(r.dst, r.cfg.ymode ? row[32*r.cfg.osel +: 32] : row[32*r.cfg.osel[2:0] +: 32]);
      end
    endcase
    req_valid = 0;
  endtask

  initial begin
    cim_req_t r;
    int t0;
    xb = '0; yb = '0; pacc = 0; pcnt = 0; req = '0;
    for (int i = 0; i < 32768; i++) dmem[i] = $urandom & $urandom;   // sparse-ish inputs
    for (int i = 16384; i < 32768; i++) dmem[i] = $urandom;          // weights
    repeat (3) @(posedge clk); rst_n = 1;
    // ---- load all weights with cim_w, one per cycle
    t0 = cyc;
    for (int row = 0; row < R; row++)
      for (int g = 0; g < C/32; g++) begin
        r = '0; r.op = CIM_WR; r.src = 30'(16384 + row*16 + g); r.wrow = 10'(row); r.wcol = 9'(g);
        issue(r);
      end
    checks++;
    if (cyc - t0 > R*C/32 + 2) begin failures++; $display("FAIL cim_w rate %0d cycles", cyc - t0); end
    // ---- X-mode convolutions, back to back
    t0 = cyc;
    for (int i = 0; i < 48; i++) begin
      r = '0; r.op = CIM_CONV; r.src = 30'(i); r.dst = 30'(1000 + i); r.cfg.osel = 4'(i % 8);
      issue(r);
    end
    checks++;
    if (cyc - t0 > 48 + 1) begin failures++; $display("FAIL conv rate: %0d cycles for 48", cyc - t0); end
    // ---- X-mode with max pooling, windows of 2, 3, 4
    for (int len = 2; len <= 4; len++)
      for (int w = 0; w < 3; w++)
        for (int i = 0; i < len; i++) begin
          r = '0; r.op = CIM_CONV; r.src = 30'(100 + 7*w + i); r.dst = 30'(2000 + 10*len + w);
          r.cfg.pool_en = 1; r.cfg.pool_len_m1 = 3'(len - 1); r.cfg.osel = 4'(len);
          issue(r);
        end
    // ---- Y-mode convolutions
    for (int i = 0; i < 24; i++) begin
      r = '0; r.op = CIM_CONV; r.src = 30'(300 + i); r.dst = 30'(3000 + i);
      r.cfg.ymode = 1; r.cfg.osel = 4'(i % 16);
      issue(r);
    end
    // ---- cim_r in both modes
    for (int i = 0; i < 20; i++) begin
      r = '0; r.op = CIM_RD; r.src = 30'($urandom_range(0, R-1)); r.dst = 30'(4000 + i);
      r.cfg.ymode = i[0]; r.cfg.osel = 4'($urandom_range(0, 15));
      issue(r);
    end
    // ---- hazards: conv into 5000, then a load of 5000 in the next cycle
    repeat (3) @(posedge clk);
    r = '0; r.op = CIM_CONV; r.src = 30'(7); r.dst = 30'(5000);
    issue(r);
    @(negedge clk); lsu_req = 1; lsu_we = 0; lsu_waddr = 30'(5000); #1;
    checks++; if (!stall) begin failures++; $display("FAIL load hazard not stalled"); end
    @(negedge clk); lsu_waddr = 30'(5001); lsu_we = 1; #1;
    checks++; if (!stall) begin failures++; $display("FAIL store during pending result"); end
    @(negedge clk); lsu_we = 0; lsu_waddr = 30'(5001); #1;
    checks++; if (stall) begin failures++; $display("FAIL stall with nothing pending"); end
    lsu_req = 0;
    // conv whose source is the previous result
    r = '0; r.op = CIM_CONV; r.src = 30'(9); r.dst = 30'(6000);
    issue(r);
    t0 = stall_seen;
    dmem[6000] = 0;
    r.src = 30'(6000); r.dst = 30'(6001);
    fork
      issue(r);
      begin @(posedge clk); @(posedge clk); if (rst_n) dmem[6000] = wr_data; end
    join
    checks++; if (stall_seen === t0) begin failures++; $display("FAIL source hazard not stalled"); end
    repeat (5) @(posedge clk);
    checks++; if (expq.size() !== 0 || busy) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
