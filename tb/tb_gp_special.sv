// tb_gp_special: LED register and switch synchroniser.
//
// Random LED writes with random byte strobes are compared with a shadow value;
// switch changes must appear on sw_q exactly two clocks later.
`timescale 1ns/1ps
module tb_gp_special;
  logic clk = 0, rst = 1, we = 0;
  logic [15:0] wdata = 0, switches = 0, leds, led_q, sw_q, shadow = 0;
  logic [1:0] wstrb = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  gp_special dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    check("leds reset", 32'(leds), 0);
    for (int n = 0; n < 200; n++) begin
      logic [15:0] s;
      @(negedge clk);
      we = 1'($urandom); wdata = $urandom; wstrb = 2'($urandom);
      s = switches; switches = $urandom;
      if (we) begin
        if (wstrb[0]) shadow[7:0]  = wdata[7:0];
        if (wstrb[1]) shadow[15:8] = wdata[15:8];
      end
      @(negedge clk);
      we = 0;
      check("leds", 32'(leds), 32'(shadow));
      check("led_q", 32'(led_q), 32'(shadow));
      check("switch not yet through", 32'(sw_q), 32'(s));
      @(negedge clk);
      check("switch after two clocks", 32'(sw_q), 32'(switches));
    end
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
