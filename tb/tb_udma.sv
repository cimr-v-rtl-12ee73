// tb_udma: programs the uDMA through its registers and checks a transfer
// from an external-memory model into data memory, a transfer back out, the
// busy/word-count status, that a start while busy is ignored and that the
// transfer needs no further register accesses once started.
module tb_udma;
  logic clk = 0, rst_n = 0;
  logic reg_req = 0, reg_we = 0;
  logic [2:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr, ext_wdata, ext_rdata;
  logic mem_en, mem_we, busy;
  logic [29:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic [31:0] ext [1024];
  logic [31:0] dm [1024];
  logic pend;
  logic [31:0] pa, pd; logic pw;
  int checks = 0, failures = 0, delay;

  udma dut (.*);

  always #5 clk = ~clk;
  // external memory: grant after a random delay, respond one cycle later
  assign ext_gnt = ext_req && !pend && (delay === 0);
  always @(posedge clk) begin
    if (!rst_n) begin pend <= 0; ext_rvalid <= 0; delay <= 2; end
    else begin
      ext_rvalid <= 0;
      if (ext_req && !pend && delay > 0) delay <= delay - 1;
      if (ext_gnt) begin pend <= 1; pa <= ext_addr; pd <= ext_wdata; pw <= ext_we; end
      if (pend) begin
        pend <= 0; ext_rvalid <= 1; delay <= $urandom_range(0, 3);
        if (pw) ext[pa[11:2]] <= pd; else ext_rdata <= ext[pa[11:2]];
      end
    end
  end
  assign mem_rdata = dm[mem_addr[9:0]];
  always @(posedge clk) if (mem_en && mem_we) dm[mem_addr[9:0]] <= mem_wdata;

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); reg_req = 1; reg_we = 1; reg_addr = 3'(a); reg_wdata = d;
    @(negedge clk); reg_req = 0; reg_we = 0;
  endtask
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) begin ext[i] = $urandom; dm[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    wr(0, 32'h40); wr(1, 32'd100); wr(2, 32'd50); wr(3, 32'h1);
    chk(busy, "busy after start");
    wr(0, 32'h0); wr(3, 32'h1);             // ignored while busy
    reg_addr = 3'd0; #1; chk(reg_rdata === 32'h40, "SRC kept while busy");
    wait (!busy); @(negedge clk);
    for (int i = 0; i < 50; i++) chk(dm[100 + i] === ext[16 + i], "ext->mem word");
    chk(dm[99] === 0 && dm[150] === 0, "no spill");
    reg_addr = 3'd4; #1; chk(reg_rdata === {31'd50, 1'b0}, "status count");
    // back out: mem 100..119 -> ext 0x800..
    for (int i = 0; i < 20; i++) dm[100 + i] = ~dm[100 + i];
    wr(0, 32'h800); wr(2, 32'd20); wr(3, 32'h3);
    wait (!busy); @(negedge clk);
    for (int i = 0; i < 20; i++) chk(ext[512 + i] === dm[100 + i], "mem->ext word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
