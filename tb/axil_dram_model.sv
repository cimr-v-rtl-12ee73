// axil_dram_model: behavioural AXI4-Lite memory standing in for the external
// DRAM and its memory controller in testbenches.  WORDS 32-bit words at byte
// address 0..; each channel handshake is delayed by LAT cycles to imitate
// DRAM latency.  Address and data of a write may arrive in either order.
module axil_dram_model
  import cimrv_pkg::*;
#(
  parameter int WORDS = 65536,
  parameter int LAT   = 3
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp
);
  logic [31:0] mem [WORDS];
  int rcnt, wcnt;
  logic [31:0] ra;
  logic rbusy, bpend;
  logic [31:0] wa, wd;
  logic have_a, have_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp <= '0; rcnt <= 0; wcnt <= 0; rbusy <= 0; bpend <= 0; have_a <= 0; have_d <= 0;
      ra <= 0; wa <= 0; wd <= 0;
    end else begin
      rsp.ar_ready <= 1'b0; rsp.aw_ready <= 1'b0; rsp.w_ready <= 1'b0;
      // read channel
      if (!rbusy && req.ar_valid && !rsp.ar_ready) begin
        if (rcnt == LAT) begin rsp.ar_ready <= 1'b1; ra <= req.ar_addr; rbusy <= 1; rcnt <= 0; end
        else rcnt <= rcnt + 1;
      end
      if (rbusy && !rsp.r_valid) begin
        rsp.r_valid <= 1'b1; rsp.r_data <= mem[ra[$clog2(WORDS)+1:2]]; rsp.r_resp <= 2'b00;
      end
      if (rsp.r_valid && req.r_ready) begin rsp.r_valid <= 1'b0; rbusy <= 0; end
      // write channel
      if (!have_a && req.aw_valid && !rsp.aw_ready && !bpend) begin
        if (wcnt == LAT) begin rsp.aw_ready <= 1'b1; wa <= req.aw_addr; have_a <= 1; wcnt <= 0; end
        else wcnt <= wcnt + 1;
      end
      if (!have_d && req.w_valid && !rsp.w_ready && !bpend) begin
        rsp.w_ready <= 1'b1; wd <= req.w_data; have_d <= 1;
      end
      if (have_a && have_d && !bpend) begin
        mem[wa[$clog2(WORDS)+1:2]] <= wd; bpend <= 1; rsp.b_valid <= 1'b1; rsp.b_resp <= 2'b00;
      end
      if (rsp.b_valid && req.b_ready) begin rsp.b_valid <= 1'b0; bpend <= 0; have_a <= 0; have_d <= 0; end
    end
  end
endmodule
