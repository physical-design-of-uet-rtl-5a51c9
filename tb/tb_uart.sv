// tb_uart: serial transmit and receive with bit timing.
//
// With a divisor of 10 clocks per bit, the testbench decodes the tx pin with
// its own sampler (checking the start bit, 8 data bits LSB first, the stop
// bit and that each bit lasts exactly 10 clocks), sends frames into rx with
// its own generator, and checks the status bits, the rx interrupt, the
// tx-empty interrupt, overrun detection and that a DATA read clears rx_full.
`timescale 1ns/1ps
module tb_uart;
  import rvmcu_pkg::*;

  localparam int DIV = 10;
  logic clk = 0, rst = 1, tx, rx = 1, irq;
  dbus_req_t req = '0;
  dbus_rsp_t rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  uart #(.DIV_RESET(16'd868)) dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  task automatic wr(logic [3:0] off, logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, strb: 4'hF, addr: 32'h9000_0000 + off, wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd(logic [3:0] off, output logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b0, strb: 4'h0, addr: 32'h9000_0000 + off, wdata: 32'h0};
    @(negedge clk);
    req = '0;
    d = rsp.rdata;
  endtask

  // independent transmitter for rx
  task automatic send(logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (DIV) @(posedge clk);
    end
  endtask

  // independent receiver on tx: measures every bit length
  logic [7:0] got_byte;
  int got_frames = 0;
  initial begin
    forever begin
      int len;
      @(negedge tx);
      len = 0;
      for (int i = 0; i < 10; i++) begin
        logic lvl;
        lvl = tx;
        len = 0;
        do begin @(posedge clk); #1 len++; end while (tx == lvl && len < DIV);
        if (i == 0) check("start bit", 32'(lvl), 0);
        else if (i == 9) check("stop bit", 32'(lvl), 1);
        else got_byte[i-1] = lvl;
        if (i < 9) check("bit length", len, DIV);
        // resynchronise to the bit boundary if the level did not change
        while (len < DIV) begin @(posedge clk); #1 len++; end
      end
      got_frames++;
    end
  end

  initial begin
    logic [31:0] v;
    repeat (2) @(negedge clk);
    rst = 0;
    rd(4'h8, v); check("divisor reset", v, 868);
    wr(4'h8, DIV);
    rd(4'h4, v); check("status idle", v, 0);
    wr(4'hC, 32'h2);
    #1 check("tx-empty irq", 32'(irq), 1);
    // transmit two bytes back to back
    wr(4'h0, 32'hA5);
    wr(4'h0, 32'h3C);
    rd(4'h4, v); check("busy and full", v & 3, 3);
    wait (got_frames == 1); check("tx byte 1", 32'(got_byte), 32'hA5);
    wait (got_frames == 2); check("tx byte 2", 32'(got_byte), 32'h3C);
    repeat (2 * DIV) @(negedge clk);
    rd(4'h4, v); check("tx idle again", v & 3, 0);
    // receive
    wr(4'hC, 32'h1);
    check("no rx irq yet", 32'(irq), 0);
    send(8'h96);
    repeat (DIV) @(negedge clk);
    check("rx irq", 32'(irq), 1);
    rd(4'h4, v); check("rx_full", v, 32'b0100);
    rd(4'h0, v); check("rx byte", v, 32'h96);
    rd(4'h4, v); check("rx_full cleared", v, 0);
    check("rx irq cleared", 32'(irq), 0);
    // overrun
    send(8'h11);
    send(8'h22);
    repeat (DIV) @(negedge clk);
    rd(4'h4, v); check("overrun", v, 32'b1100);
    rd(4'h0, v); check("latest byte kept", v, 32'h22);
    rd(4'h4, v); check("overrun cleared", v, 0);
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
