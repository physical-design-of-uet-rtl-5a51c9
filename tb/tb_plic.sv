// tb_plic: gateways, priorities, threshold and claim/complete.
//
// Checks the register read-back, that a high source becomes pending, that irq
// needs enable and a priority above the threshold, that the claim returns the
// highest-priority source (lowest id on a tie), clears its pending bit and
// blocks it until completion, that a still-high source pends again after the
// completion, and that a source dropped before its claim stays pending (the
// gateway latches the request).
`timescale 1ns/1ps
module tb_plic;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1, irq;
  logic [2:0] src = 0;
  dbus_req_t req = '0;
  dbus_rsp_t rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  plic dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  task automatic wr(logic [21:0] off, logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, strb: 4'hF, addr: 32'h0C00_0000 + off, wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd(logic [21:0] off, output logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b0, strb: 4'h0, addr: 32'h0C00_0000 + off, wdata: 32'h0};
    @(negedge clk);
    req = '0;
    d = rsp.rdata;
  endtask

  initial begin
    logic [31:0] v;
    repeat (2) @(negedge clk);
    rst = 0;
    wr(4, 3); wr(8, 5); wr(12, 5);
    rd(4, v); check("prio1", v, 3);
    rd(8, v); check("prio2", v, 5);
    wr(22'h200000, 2); rd(22'h200000, v); check("threshold", v, 2);
    src = 3'b001; @(negedge clk); @(negedge clk);
    rd(22'h1000, v); check("pending 1", v, 32'b0010);
    check("no irq while disabled", 32'(irq), 0);
    wr(22'h2000, 32'b1110); rd(22'h2000, v); check("enable", v, 32'b1110);
    #1 check("irq with prio 3 > 2", 32'(irq), 1);
    wr(22'h200000, 3); #1 check("no irq when threshold = prio", 32'(irq), 0);
    wr(22'h200000, 0);
    src = 3'b111; @(negedge clk);
    rd(22'h200004, v); check("claim highest (tie -> id 2)", v, 2);
    rd(22'h1000, v); check("claimed source not pending", v, 32'b1010);
    rd(22'h200004, v); check("claim next = 3", v, 3);
    rd(22'h200004, v); check("claim next = 1", v, 1);
    rd(22'h200004, v); check("nothing left", v, 0);
    #1 check("irq low when all in service", 32'(irq), 0);
    src = 3'b000;
    wr(22'h200004, 2);
    @(negedge clk);
    rd(22'h1000, v); check("no re-pend after low source completes", v, 0);
    src = 3'b100;                       // source 3 still in service
    @(negedge clk);
    rd(22'h1000, v); check("in-service source blocked", v, 0);
    wr(22'h200004, 3);
    @(negedge clk);
    rd(22'h1000, v); check("pending again after complete", v, 32'b1000);
    src = 3'b000;
    @(negedge clk);
    rd(22'h1000, v); check("request latched by gateway", v, 32'b1000);
    rd(22'h200004, v); check("claim 3", v, 3);
    wr(22'h200004, 3); wr(22'h200004, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
