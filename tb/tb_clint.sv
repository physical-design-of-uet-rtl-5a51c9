// tb_clint: machine timer, compare and software interrupt.
//
// Checks that mtime counts one per clock (read twice N cycles apart), that it
// can be written, that irq_mtimer rises exactly when mtime reaches mtimecmp and
// falls when mtimecmp is moved ahead, that mtimecmp resets to all ones, that
// msip drives irq_msoft, and that byte-strobed writes change only their bytes.
`timescale 1ns/1ps
module tb_clint;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1, irq_mtimer, irq_msoft;
  dbus_req_t req = '0;
  dbus_rsp_t rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  clint dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  task automatic wr(logic [15:0] off, logic [31:0] d, logic [3:0] s = 4'hF);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, strb: s, addr: 32'h0200_0000 + off, wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd(logic [15:0] off, output logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b0, strb: 4'h0, addr: 32'h0200_0000 + off, wdata: 32'h0};
    @(negedge clk);
    req = '0;
    d = rsp.rdata;
  endtask

  initial begin
    logic [31:0] t0, t1, v;
    int n;
    repeat (2) @(negedge clk);
    rst = 0;
    rd(16'h4000, v); check("mtimecmp low reset", v, 32'hffff_ffff);
    rd(16'h4004, v); check("mtimecmp high reset", v, 32'hffff_ffff);
    check("no timer irq after reset", 32'(irq_mtimer), 0);
    rd(16'hBFF8, t0);
    repeat (20) @(negedge clk);
    rd(16'hBFF8, t1);
    check("mtime counts every clock", t1 - t0, 22);
    // compare
    wr(16'hBFFC, 32'h0); wr(16'hBFF8, 32'h0);
    wr(16'h4004, 32'h0); wr(16'h4000, 32'd100);
    n = 0;
    while (!irq_mtimer && n < 1000) begin @(negedge clk); n++; end
    rd(16'hBFF8, v);
    check("irq at mtimecmp", (v >= 100 && v <= 104) ? 1 : 0, 1);
    check("irq not early", (n > 80) ? 1 : 0, 1);
    wr(16'h4000, 32'd5000);
    #1 check("irq drops after moving mtimecmp", 32'(irq_mtimer), 0);
    // 64-bit carry
    wr(16'hBFF8, 32'hffff_fff0); wr(16'hBFFC, 32'h1);
    repeat (20) @(negedge clk);
    rd(16'hBFFC, v); check("mtime carries into high word", v, 32'h2);
    wr(16'h4000, 32'h0); wr(16'h4004, 32'h3);
    #1 check("64-bit compare: high word decides", 32'(irq_mtimer), 0);
    wr(16'h4004, 32'h2);
    #1 check("64-bit compare: equal high, low passed", 32'(irq_mtimer), 1);
    // byte strobes
    wr(16'h4000, 32'h1122_3344); wr(16'h4000, 32'hAABB_CCDD, 4'b0100);
    rd(16'h4000, v); check("strobed write", v, 32'h11BB_3344);
    // software interrupt
    check("msip reset", 32'(irq_msoft), 0);
    wr(16'h0000, 32'h1); check("msip set", 32'(irq_msoft), 1);
    rd(16'h0000, v); check("msip read", v, 32'h1);
    wr(16'h0000, 32'h0); check("msip clear", 32'(irq_msoft), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
