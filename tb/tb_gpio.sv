// tb_gpio: ports A, B, C, level interrupts and the GP-Special registers.
//
// For each port: direction and output registers reach pin_oe/pin_out, pad
// inputs reach IN after the two-flop synchroniser, and the per-pin level
// interrupt fires for the programmed polarity only while enabled, and drops
// when the level goes away (level-sensitive, nothing latched). Also checks the
// IRQ_STATUS register and the LED/switch registers of GP-Special through the
// GPIO bus window.
`timescale 1ns/1ps
module tb_gpio;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1, irq;
  logic [23:0] pin_in = 0, pin_out, pin_oe;
  logic [15:0] switches = 0, leds;
  dbus_req_t req = '0;
  dbus_rsp_t rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  gpio dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  task automatic wr(logic [11:0] off, logic [31:0] d, logic [3:0] s = 4'hF);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, strb: s, addr: 32'h9000_2000 + off, wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd(logic [11:0] off, output logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b0, strb: 4'h0, addr: 32'h9000_2000 + off, wdata: 32'h0};
    @(negedge clk);
    req = '0;
    d = rsp.rdata;
  endtask

  initial begin
    logic [31:0] v;
    logic [7:0] dv, ov, iv;
    repeat (2) @(negedge clk);
    rst = 0;
    check("all inputs after reset", 32'(pin_oe), 0);
    for (int p = 0; p < 3; p++) begin
      dv = $urandom; ov = $urandom; iv = $urandom;
      wr(12'(16 * p), dv); wr(12'(16 * p + 4), ov);
      check("pin_oe", 32'(pin_oe[8*p +: 8]), 32'(dv));
      check("pin_out", 32'(pin_out[8*p +: 8]), 32'(ov));
      rd(12'(16 * p), v); check("DIR read", v, 32'(dv));
      rd(12'(16 * p + 4), v); check("OUT read", v, 32'(ov));
      pin_in[8*p +: 8] = iv;
      @(negedge clk); @(negedge clk);
      rd(12'(16 * p + 8), v); check("IN read", v, 32'(iv));
    end
    // level interrupts on port B pin 3 (active high) and port C pin 6 (active low)
    pin_in = 24'h0;
    for (int p = 0; p < 3; p++) wr(12'(16 * p), 0);
    repeat (3) @(negedge clk);
    #1 check("no irq before enable", 32'(irq), 0);
    wr(12'h34, 32'h08);                   // B.POL: pin 3 active high, others low
    wr(12'h1C, 32'h08);                   // B.IE pin 3
    repeat (3) @(negedge clk);
    check("active-high pin low: no irq", 32'(irq), 0);
    pin_in[11] = 1;
    repeat (3) @(negedge clk);
    check("active-high pin high: irq", 32'(irq), 1);
    rd(12'h040, v); check("IRQ_STATUS", v, 32'h0000_0800);
    pin_in[11] = 0;
    repeat (3) @(negedge clk);
    check("level gone: irq gone", 32'(irq), 0);
    wr(12'h38, 32'h00);                   // C.POL: active low
    wr(12'h2C, 32'h40);                   // C.IE pin 6
    repeat (3) @(negedge clk);
    check("active-low pin low: irq", 32'(irq), 1);
    pin_in[22] = 1;
    repeat (3) @(negedge clk);
    check("active-low pin high: no irq", 32'(irq), 0);
    pin_in[22] = 0;
    repeat (3) @(negedge clk);
    wr(12'h2C, 32'h00);
    #1 check("disable masks irq", 32'(irq), 0);
    // GP-Special
    wr(12'h100, 32'hBEEF);
    check("leds", 32'(leds), 32'hBEEF);
    wr(12'h100, 32'h1200, 4'b0010);
    check("led byte strobe", 32'(leds), 32'h12EF);
    rd(12'h100, v); check("led read", v, 32'h12EF);
    switches = 16'hA55A;
    repeat (2) @(negedge clk);
    rd(12'h104, v); check("switches", v, 32'hA55A);
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
