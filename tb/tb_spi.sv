// tb_spi: SPI master transfers against a mode-0 slave model.
//
// The slave model shifts out its own byte on falling sclk edges (first bit
// ready when cs_n falls) and samples mosi on rising edges. For several bytes
// and dividers the testbench checks the byte the slave received, the byte the
// master received, that sclk idles low and makes 8 pulses with a half period of
// DIV clocks, the busy/done status, cs_n control and the done interrupt.
`timescale 1ns/1ps
module tb_spi;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1, sclk, mosi, miso, cs_n, irq;
  dbus_req_t req = '0;
  dbus_rsp_t rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  spi dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  task automatic wr(logic [3:0] off, logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, strb: 4'hF, addr: 32'h9000_1000 + off, wdata: d};
    @(negedge clk);
    req = '0;
  endtask

  task automatic rd(logic [3:0] off, output logic [31:0] d);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b0, strb: 4'h0, addr: 32'h9000_1000 + off, wdata: 32'h0};
    @(negedge clk);
    req = '0;
    d = rsp.rdata;
  endtask

  // slave model
  logic [7:0] slave_tx, slave_rx;
  int rises = 0;
  assign miso = slave_tx[7];
  always @(posedge sclk) begin
    if (!cs_n) begin
      slave_rx <= {slave_rx[6:0], mosi};
      rises++;
    end
  end
  always @(negedge sclk) if (!cs_n) slave_tx <= {slave_tx[6:0], 1'b0};

  // half-period measurement
  int hp_min = 1000, hp_max = 0, hp = 0;
  logic sclk_q = 0;
  always @(posedge clk) begin
    if (sclk != sclk_q) begin
      if (hp < hp_min) hp_min = hp;
      if (hp > hp_max) hp_max = hp;
      hp = 1;
    end else hp++;
    sclk_q <= sclk;
  end

  initial begin
    logic [31:0] v;
    logic [7:0] mb, sb;
    repeat (2) @(negedge clk);
    rst = 0;
    check("sclk idles low", 32'(sclk), 0);
    check("cs_n idles high", 32'(cs_n), 1);
    wr(4'hC, 32'h3);
    check("cs asserted", 32'(cs_n), 0);
    for (int d = 1; d <= 4; d++) begin
      wr(4'h8, d);
      repeat (3) begin
        mb = $urandom; sb = $urandom;
        slave_tx = sb; rises = 0;
        wr(4'h0, mb);
        @(negedge clk);
        hp_min = 1000; hp_max = 0; hp = 0;
        rd(4'h4, v); check("busy", v & 1, 1);
        do rd(4'h4, v); while (!v[1]);
        check("done irq", 32'(irq), 1);
        check("8 clock pulses", rises, 8);
        check("slave received", 32'(slave_rx), 32'(mb));
        rd(4'h0, v); check("master received", v, 32'(sb));
        check("done cleared by read", 32'(irq), 0);
        check("sclk low after transfer", 32'(sclk), 0);
        check("half period", (hp_max == d && hp_min >= d - 1) ? 1 : 0, 1);
      end
    end
    wr(4'hC, 32'h0);
    check("cs released", 32'(cs_n), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
