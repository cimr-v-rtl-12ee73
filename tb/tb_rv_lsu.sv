// tb_rv_lsu: byte, half-word and word loads and stores at every offset:
// byte enables, store-data replication, sign/zero extension of loads and
// the misaligned flag, against values worked out here.
module tb_rv_lsu;
  logic load, store, req, we, mis;
  logic [2:0] f3;
  logic [31:0] addr, wdin, wdata, rdata, result, e;
  logic [29:0] waddr;
  logic [3:0] be, ebe;
  int checks = 0, failures = 0;
  rv_lsu dut (.load, .store, .funct3(f3), .addr, .wdata_in(wdin), .req, .we, .waddr, .be,
              .wdata, .rdata, .result, .misaligned(mis));
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic emis; logic [31:0] sh;
      addr = $urandom; rdata = $urandom; wdin = $urandom;
      load = t[0]; store = !t[0];
      f3 = load ? 3'(t % 3 + ((t % 5 === 0) ? 4 : 0)) : 3'(t % 3);
      if (f3 === 3'b110) f3 = 3'b100;
      #1;
      emis = (f3[1:0] === 2'b01) ? addr[0] : (f3[1:0] === 2'b10) ? (addr[1:0] !== 0) : 1'b0;
      sh = rdata >> (8 * addr[1:0]);
      case (f3)
        0: e = {{24{sh[7]}}, sh[7:0]};  1: e = {{16{sh[15]}}, sh[15:0]};
        4: e = {24'd0, sh[7:0]};        5: e = {16'd0, sh[15:0]};  default: e = rdata;
      endcase
      ebe = (f3[1:0] === 0) ? (4'b1 << addr[1:0]) : (f3[1:0] === 1) ? (4'b11 << addr[1:0]) : 4'hF;
      checks++;
      if (mis !== emis || req !== !emis || waddr !== addr[31:2] || we !== store) begin
        failures++; $display("FAIL ctl t=%0d", t);
      end
      checks++;
      if (load && !emis && result !== e) begin failures++; $display("FAIL load t=%0d f3=%0d", t, f3); end
      checks++;
      if (store && !emis) begin
        if (be !== ebe) begin failures++; $display("FAIL be t=%0d", t); end
        for (int b = 0; b < 4; b++)
          if (ebe[b] && wdata[8*b +: 8] !== wdin[8*(b - addr[1:0] * (f3[1:0] !== 2)) +: 8]) begin
            failures++; $display("FAIL wdata t=%0d", t); break;
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
