// tb_cimrv_top: end-to-end run of the whole chip at its default sizes
// (1024 x 512 macro, 256 Kb FM SRAM, 512 Kb weight SRAM): a two-layer binary
// 1-D CNN in the shape of the keyword-spotting flow.
//
// The host loads a program over AXI4-Lite and starts the core.  The program
//   1. moves layer-1 weights (512 word lines) and 512 raw samples from DRAM
//      into the weight and FM SRAMs with the uDMA, and copies the weights
//      into the macro with cim_w;
//   2. pre-processes on the core: a first-difference high-pass filter and a
//      sign quantiser pack the samples into 16 binary words;
//   3. starts the uDMA on the layer-2 weights (weight fusion) and, meanwhile,
//      runs layer 1: 16 X-mode cim_conv, each shifting one new word into the
//      input buffer (layer fusion), max-pooled in pairs into 8 words;
//   4. waits for the uDMA, updates the macro with the layer-2 weights,
//      switches to Y-mode and runs layer 2 (8 cim_conv), loading each result
//      right after its conv (a hazard stall);
//   5. reads two word lines back with cim_r, post-processes on the core
//      (global average pooling per channel by bit counting, arg-max), and
//      sends the results to DRAM with the uDMA.
// Every result in DRAM is compared with a model computed here from the same
// inputs.  The mechanisms (X/Y mode switch, pooling windows, layer-fusion
// reuse, weight-fusion overlap, hazard stalls, both uDMA directions, cim_r,
// cim_w) are counted and each must occur.
module tb_cimrv_top;
  import cimrv_pkg::*;
  import rv_asm_pkg::*;

  logic clk = 0, rst_n = 0, core_halted;
  axil_req_t host_req, dram_req;
  axil_rsp_t host_rsp, dram_rsp;
  int checks = 0, failures = 0, cyc = 0;

  cimrv_top dut (.clk, .rst_n, .host_req, .host_rsp, .dram_req, .dram_rsp, .core_halted);
  axil_dram_model #(.WORDS(32768), .LAT(3)) u_dram (.clk, .rst_n, .req(dram_req), .rsp(dram_rsp));

  always #10 clk = ~clk;   // 50 MHz
  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk); failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ------------------------------------------------------------ event counters
  int n_xconv = 0, n_yconv = 0, n_pool = 0, n_reuse = 0, n_wfuse = 0, n_stall = 0;
  int n_cimw = 0, n_cimr = 0, n_dma_in = 0, n_dma_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_cim.fire) begin
      case (dut.cim_req.op)
        CIM_CONV: begin
          if (dut.cim_req.cfg.ymode) n_yconv++; else n_xconv++;
          if (!dut.cim_req.cfg.ymode && dut.u_cim.xq !== '0) n_reuse++;
          if (dut.dma_busy) n_wfuse++;
        end
        CIM_WR: n_cimw++;
        default: n_cimr++;
      endcase
    end
    if (dut.u_cim.u_pool.valid && dut.u_cim.u_pool.last) n_pool++;
    if (dut.cim_stall && (dut.cim_valid || dut.d_req)) n_stall++;
    if (dut.dma_en && dut.dma_we) n_dma_in++;
    if (dut.dma_en && !dut.dma_we) n_dma_out++;
  end

  // ------------------------------------------------------------ program builder
  logic [31:0] prog [$];
  function automatic int here(); return prog.size(); endfunction
  function automatic void e(logic [31:0] i); prog.push_back(i); endfunction
  function automatic void li(int rd, int v);
    int hi = (v + 'h800) >>> 12, lo = v - (hi << 12);
    if (hi !== 0) begin e(lui(rd, hi)); if (lo !== 0) e(addi(rd, rd, lo)); end
    else e(addi(rd, 0, lo));
  endfunction
  // start a uDMA transfer (x20 holds the register base), optionally wait
  function automatic void dma(int src, int dst, int len, int ctrl, bit wait_done);
    li(21, src); e(sw(21, 20, 0));
    li(21, dst); e(sw(21, 20, 4));
    li(21, len); e(sw(21, 20, 8));
    li(21, ctrl); e(sw(21, 20, 12));
    if (wait_done) dma_wait();
  endfunction
  function automatic void dma_wait();
    int l = here();
    e(lw(21, 20, 16)); e(andi(21, 21, 1)); e(bne(21, 0, (l - here()) * 4));
  endfunction
  // copy ROWS word lines of 16 words from weight-SRAM word SRC into the macro
  function automatic void load_macro(int src, int rows);
    int l;
    li(10, src); li(11, 0); li(22, rows);
    l = here();
    for (int k = 0; k < 16; k++) e(cim(3, 0, 1, k, k));
    e(addi(10, 10, 16)); e(addi(11, 11, 1));
    e(blt(11, 22, (l - here()) * 4));
  endfunction

  // DRAM layout (bytes) and on-chip layout (words)
  localparam int D_L1 = 'h0000, D_L2 = 'h8000, D_RAW = 'hC000, D_OUT = 'h10000;
  localparam int W_L1 = 'h2000, W_L2 = 'h4000;
  localparam int F_RAW = 'h000, F_Q = 'h400, F_L1 = 'h500, F_L2 = 'h600;
  localparam int F_SUM = 'h700, F_GAP = 'h710, F_CLS = 'h730, F_RD = 'h740, N_OUT = 'h150;

  function automatic void build();
    int l, l2, skip;
    li(20, 32'h0002_0000);
    // 1. weights and samples in, weights into the macro
    dma(D_L1, W_L1, 512 * 16, 1, 1);
    dma(D_RAW, F_RAW, 512, 1, 1);
    load_macro(W_L1, 512);
    // 2. pre-processing: q bit b of word i = (x[32i+b] - x[32i+b-1] > 0)
    li(8, F_RAW * 4); li(9, 0); li(18, F_Q * 4); li(19, 0); li(23, 16); li(24, 32);
    l = here();
      li(5, 0); li(6, 0);
      l2 = here();
        e(lw(7, 8, 0)); e(sub(28, 7, 9)); e(addi(9, 7, 0)); e(addi(8, 8, 4));
        e(slt(28, 0, 28)); e(sll(28, 28, 6)); e(or_(5, 5, 28));
        e(addi(6, 6, 1)); e(blt(6, 24, (l2 - here()) * 4));
      e(sw(5, 18, 0)); e(addi(18, 18, 4)); e(addi(19, 19, 1));
      e(blt(19, 23, (l - here()) * 4));
    // 3. weight fusion: layer-2 weights stream in while layer 1 runs
    dma(D_L2, W_L2, 256 * 16, 1, 0);
    li(7, 'h60); e(csrrw(0, 'h7C0, 7));            // X-mode, word 0, pool 2
    li(10, F_Q); li(11, F_L1); li(19, 0); li(23, 8);
    l = here();
      e(cim(1, 0, 1, 0, 0)); e(cim(1, 0, 1, 1, 0));
      e(addi(10, 10, 2)); e(addi(11, 11, 1)); e(addi(19, 19, 1));
      e(blt(19, 23, (l - here()) * 4));
    // 4. weight update, layer 2 in Y-mode with a load right after each conv
    dma_wait();
    load_macro(W_L2, 256);
    li(7, 'h1); e(csrrw(0, 'h7C0, 7));             // Y-mode, word 0, no pooling
    li(10, F_L1); li(11, F_L2); li(18, F_L2 * 4); li(26, 0); li(19, 0); li(23, 8);
    l = here();
      e(cim(1, 0, 1, 0, 0)); e(lw(7, 18, 0)); e(xor_(26, 26, 7));
      e(addi(10, 10, 1)); e(addi(11, 11, 1)); e(addi(18, 18, 4)); e(addi(19, 19, 1));
      e(blt(19, 23, (l - here()) * 4));
    li(18, F_SUM * 4); e(sw(26, 18, 0));
    // 5. cim_r of word lines 5 and 6, word 3, X-mode
    li(7, 'h6); e(csrrw(0, 'h7C0, 7));
    li(10, 5); li(11, F_RD); e(cim(2, 0, 1, 0, 0)); e(cim(2, 0, 1, 1, 1));
    //    global average pooling (bit counts) and arg-max over 32 channels
    li(19, 0); li(24, 32); li(23, 8); li(25, -1); li(27, 0); li(18, F_GAP * 4);
    l = here();
      li(5, 0); li(6, 0); li(8, F_L2 * 4);
      l2 = here();
        e(lw(7, 8, 0)); e(srl(7, 7, 19)); e(andi(7, 7, 1)); e(add(5, 5, 7));
        e(addi(8, 8, 4)); e(addi(6, 6, 1)); e(blt(6, 23, (l2 - here()) * 4));
      e(sw(5, 18, 0)); e(addi(18, 18, 4));
      e(bge(25, 5, 12)); e(addi(25, 5, 0)); e(addi(27, 19, 0));
      e(addi(19, 19, 1)); e(blt(19, 24, (l - here()) * 4));
    li(18, F_CLS * 4); e(sw(27, 18, 0));
    // results out
    dma(D_OUT, F_L2, N_OUT, 3, 1);
    e(ebreak());
  endfunction

  // ------------------------------------------------------------ host AXI
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

  // ------------------------------------------------------------ reference model
  logic [511:0] w1 [512], w2 [256];
  logic [31:0] q [16], l1 [8], l2 [8], rd5, rd6, sum;
  int gap [32], cls;

  function automatic logic [511:0] sa(logic [1023:0] in, int nrows, bit l2w, bit ym);
    logic [511:0] o = '0;
    for (int k = 0; k < 32; k++) begin
      int pos = 0, neg = 0;
      for (int j = 0; j < nrows; j++)
        if (in[j]) begin
          logic [511:0] row = l2w ? (j < 256 ? w2[j] : w1[j]) : w1[j];
          pos += row[2*k]; neg += row[2*k+1];
        end
      o[k] = pos > neg;
    end
    return o;
  endfunction

  task automatic reference();
    logic [1023:0] xb = '0;
    logic [511:0] yb = '0, o;
    int prev = 0, x, best = -1;
    for (int r = 0; r < 512; r++) for (int k = 0; k < 16; k++) w1[r][32*k +: 32] = u_dram.mem[D_L1/4 + 16*r + k];
    for (int r = 0; r < 256; r++) for (int k = 0; k < 16; k++) w2[r][32*k +: 32] = u_dram.mem[D_L2/4 + 16*r + k];
    for (int i = 0; i < 16; i++) begin
      q[i] = 0;
      for (int b = 0; b < 32; b++) begin
        x = int'(u_dram.mem[D_RAW/4 + 32*i + b]);
        q[i][b] = (x - prev) > 0; prev = x;
      end
    end
    for (int i = 0; i < 8; i++) begin
      xb = {xb[991:0], q[2*i]};   o = sa(xb, 1024, 0, 0); l1[i] = o[31:0];
      xb = {xb[991:0], q[2*i+1]}; o = sa(xb, 1024, 0, 0); l1[i] |= o[31:0];
    end
    sum = 0;
    for (int i = 0; i < 8; i++) begin
      yb = {yb[479:0], l1[i]};
      o = sa({512'd0, yb}, 512, 1, 1); l2[i] = o[31:0]; sum ^= l2[i];
    end
    rd5 = w2[5][127:96]; rd6 = w2[6][127:96];
    for (int c = 0; c < 32; c++) begin
      gap[c] = 0;
      for (int p = 0; p < 8; p++) gap[c] += l2[p][c];
      if (gap[c] > best) begin best = gap[c]; cls = c; end
    end
  endtask

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] st;
    int t0;
    host_req = '0;
    // inputs in DRAM: random weights, samples in -1000..1000
    for (int i = 0; i < 32768; i++) u_dram.mem[i] = 0;
    for (int i = 0; i < 512 * 16; i++) u_dram.mem[D_L1/4 + i] = $urandom;
    for (int i = 0; i < 256 * 16; i++) u_dram.mem[D_L2/4 + i] = $urandom;
    for (int i = 0; i < 512; i++) u_dram.mem[D_RAW/4 + i] = 32'($signed($urandom_range(0, 2000)) - 1000);
    build();
    reference();
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (prog[i]) host_write(32'(4 * i), prog[i]);
    host_write(HOST_CTRL, 1);
    t0 = cyc;
    do begin
      repeat (200) @(posedge clk);
      host_read(HOST_STATUS, st);
    end while (!st[0]);
    $display("program of %0d instructions ran in %0d cycles", prog.size(), cyc - t0);
    chk(st[1] === 0, "core halted without error");
    for (int i = 0; i < 8; i++) chk(u_dram.mem[D_OUT/4 + i] === l2[i], $sformatf("layer-2 word %0d", i));
    chk(u_dram.mem[D_OUT/4 + (F_SUM - F_L2)] === sum, "checksum");
    for (int c = 0; c < 32; c++) chk(u_dram.mem[D_OUT/4 + (F_GAP - F_L2) + c] === 32'(gap[c]), $sformatf("gap %0d", c));
    chk(u_dram.mem[D_OUT/4 + (F_CLS - F_L2)] === 32'(cls), "class");
    chk(u_dram.mem[D_OUT/4 + (F_RD - F_L2)] === rd5 && u_dram.mem[D_OUT/4 + (F_RD - F_L2) + 1] === rd6, "cim_r");
    for (int i = 0; i < 8; i++) chk(dut.u_fm.mem[F_L1 + i] === l1[i], $sformatf("layer-1 pooled word %0d", i));
    for (int i = 0; i < 16; i++) chk(dut.u_fm.mem[F_Q + i] === q[i], $sformatf("quantised word %0d", i));
    $display("events: xconv=%0d yconv=%0d pool=%0d reuse=%0d wfuse=%0d stall=%0d cim_w=%0d cim_r=%0d dma_in=%0d dma_out=%0d",
             n_xconv, n_yconv, n_pool, n_reuse, n_wfuse, n_stall, n_cimw, n_cimr, n_dma_in, n_dma_out);
    chk(n_xconv === 16, "X-mode convs");
    chk(n_yconv === 8, "Y-mode convs (mode switch)");
    chk(n_pool === 8, "max-pool windows");
    chk(n_reuse > 0, "layer-fusion buffer reuse");
    chk(n_wfuse > 0, "weight fusion: conv while uDMA busy");
    chk(n_stall > 0, "hazard stalls");
    chk(n_cimw === 768 * 16, "cim_w count");
    chk(n_cimr === 2, "cim_r count");
    chk(n_dma_in === 8192 + 512 + 4096, "uDMA in");
    chk(n_dma_out === N_OUT, "uDMA out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
