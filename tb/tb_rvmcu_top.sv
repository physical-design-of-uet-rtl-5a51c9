// tb_rvmcu_top: end-to-end test of the whole microcontroller.
//
// The testbench writes a program (soc_prog.hex, 529 words) into the four
// memory banks, releases reset and plays the outside world: it loops the UART
// transmit pin back to the receive pin, loops SPI MOSI back to MISO, drives
// port B inputs with 0x3C and the switches with 0x1234, and raises port C pin 0
// when the program lights LED pattern 0x0001. The program configures the GPIO,
// GP-Special, PLIC, UART, SPI and CLINT, waits for the UART receive, GPIO,
// machine-timer and machine-software interrupts, runs a division, a load-use
// pair, an AMO and an ECALL, stores its results to a 16-word signature at
// 0x8000_0800 and signals the end with a store to 0x8000_0F00. The testbench
// checks the signature against values worked out by hand, decodes the UART
// and SPI waveforms on the pins independently of the design, checks the port A
// outputs and LEDs, and counts how often each mechanism happened: pipeline
// stall, branch flush, load-use bypass, AMO, exception, each interrupt kind,
// PLIC claim, UART frame, SPI transfer. A mechanism that never happened is a
// failure. Every parameter is at its default.
`timescale 1ns/1ps
module tb_rvmcu_top;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic        uart_tx, uart_rx, spi_sclk, spi_mosi, spi_miso, spi_cs_n;
  logic [23:0] gpio_in, gpio_out, gpio_oe;
  logic [15:0] switches, leds;

  rvmcu_top dut (.*);

  assign uart_rx  = uart_tx;
  assign spi_miso = spi_mosi;
  assign switches = 16'h1234;
  always_comb begin
    gpio_in        = '0;
    gpio_in[15:8]  = 8'h3c;
    gpio_in[16]    = (leds == 16'h0001);
  end

  int checks = 0, failures = 0;
  bit done = 0;
  logic [31:0] prog [529];

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08x expected %08x", what, got, exp);
    end
  endtask

  // ---------------------------------------------------------- mechanism counters
  int n_stall = 0, n_flush = 0, n_bypass_load = 0, n_amo = 0, n_exc = 0;
  int n_irq_ext = 0, n_irq_tim = 0, n_irq_sw = 0, n_claim = 0;
  int n_uart_frames = 0, n_spi_bytes = 0;
  logic [7:0] uart_byte, spi_byte;

  always @(posedge clk) if (!rst) begin
    if (!dut.u_core.imem_en) n_stall++;
    if (dut.u_core.fire && dut.u_core.jump) n_flush++;
    if (dut.u_core.de_valid && dut.u_core.wb_valid && dut.u_core.wb_load &&
        (dut.u_core.instr[19:15] == dut.u_core.wb_rd)) n_bypass_load++;
    if (dut.u_core.lsu_stall) n_amo++;
    if (dut.u_core.exc) n_exc++;
    if (dut.u_core.take_irq) begin
      if (dut.u_core.irq_cause == IRQ_MEXT)   n_irq_ext++;
      if (dut.u_core.irq_cause == IRQ_MTIMER) n_irq_tim++;
      if (dut.u_core.irq_cause == IRQ_MSOFT)  n_irq_sw++;
    end
    if (dut.s_req[SL_PLIC].valid && !dut.s_req[SL_PLIC].we &&
        dut.s_req[SL_PLIC].addr == 32'h0C20_0004) n_claim++;
    if (dut.core_req.valid && dut.core_req.we && dut.core_req.addr == 32'h8000_0F00) done <= 1;
  end

  // UART receiver model: 8 clocks per bit (the program's divisor)
  initial begin
    forever begin
      @(negedge uart_tx);
      repeat (4) @(posedge clk);                 // middle of the start bit
      for (int i = 0; i < 8; i++) begin
        repeat (8) @(posedge clk);
        uart_byte[i] = uart_tx;
      end
      repeat (8) @(posedge clk);
      n_uart_frames++;
      check("UART stop bit", 32'(uart_tx), 32'h1);
      check("UART byte on pin", 32'(uart_byte), 32'h5a);
    end
  end

  // SPI slave model: mode 0, sample MOSI on rising edges while selected
  initial begin
    forever begin
      @(negedge spi_cs_n);
      for (int i = 7; i >= 0; i--) begin
        @(posedge spi_sclk);
        spi_byte[i] = spi_mosi;
      end
      n_spi_bytes++;
      check("SPI byte on pin", 32'(spi_byte), 32'hc3);
    end
  end

  initial begin
    $readmemh("tb/soc_prog.hex", prog);
    for (int i = 0; i < 256; i++) begin
      dut.u_mem.g_bank[0].u_bank.mem[i] = prog[i];
      dut.u_mem.g_bank[1].u_bank.mem[i] = prog[256 + i];
      dut.u_mem.g_bank[2].u_bank.mem[i] = (i < 17) ? prog[512 + i] : 32'h0;
      dut.u_mem.g_bank[3].u_bank.mem[i] = 32'h0;
    end
    repeat (3) @(posedge clk);
    #1 rst = 0;
    wait (done);
    repeat (3) @(posedge clk);
    check("port B input",     dut.u_mem.g_bank[2].u_bank.mem[0], 32'h3c);
    check("switches",         dut.u_mem.g_bank[2].u_bank.mem[1], 32'h1234);
    check("LED read-back",    dut.u_mem.g_bank[2].u_bank.mem[2], 32'hbeef);
    check("UART rx byte",     dut.u_mem.g_bank[2].u_bank.mem[3], 32'h5a);
    check("SPI rx byte",      dut.u_mem.g_bank[2].u_bank.mem[4], 32'hc3);
    check("GPIO irq count",   dut.u_mem.g_bank[2].u_bank.mem[5], 32'h1);
    check("timer irq count",  dut.u_mem.g_bank[2].u_bank.mem[6], 32'h1);
    check("soft irq count",   dut.u_mem.g_bank[2].u_bank.mem[7], 32'h1);
    check("1000/7",           dut.u_mem.g_bank[2].u_bank.mem[8], 32'd142);
    check("load-use",         dut.u_mem.g_bank[2].u_bank.mem[9], 32'd143);
    check("amoadd",           dut.u_mem.g_bank[2].u_bank.mem[10], 32'd285);
    check("exception count",  dut.u_mem.g_bank[2].u_bank.mem[11], 32'h1);
    check("untouched",        dut.u_mem.g_bank[2].u_bank.mem[12], 32'hdeadbeef);
    check("port A out",       32'(gpio_out[7:0]), 32'ha5);
    check("port A oe",        32'(gpio_oe[7:0]), 32'hff);
    check("port B oe",        32'(gpio_oe[15:8]), 32'h00);
    check("LEDs",             32'(leds), 32'h2222);
    // every mechanism must have happened
    check("stall seen",       32'(n_stall >= 33), 1);
    check("flush seen",       32'(n_flush > 0), 1);
    check("load bypass seen", 32'(n_bypass_load > 0), 1);
    check("AMO seen",         32'(n_amo == 1), 1);
    check("exception seen",   32'(n_exc == 1), 1);
    check("ext irq seen",     32'(n_irq_ext == 2), 1);
    check("timer irq seen",   32'(n_irq_tim == 1), 1);
    check("soft irq seen",    32'(n_irq_sw == 1), 1);
    check("PLIC claims",      32'(n_claim == 2), 1);
    check("UART frames",      32'(n_uart_frames == 1), 1);
    check("SPI bytes",        32'(n_spi_bytes == 1), 1);
    $display("stall=%0d flush=%0d bypass_load=%0d amo=%0d exc=%0d ext=%0d tim=%0d sw=%0d claim=%0d uart=%0d spi=%0d",
             n_stall, n_flush, n_bypass_load, n_amo, n_exc, n_irq_ext, n_irq_tim, n_irq_sw,
             n_claim, n_uart_frames, n_spi_bytes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
