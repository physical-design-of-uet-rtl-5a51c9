// rvmcu_top: the complete RV32 microcontroller.
//
// Connects the blocks of the paper's block diagram: the 3-stage processor core
// (pipeline_top), the four-bank memory (mem_top), the Dbus2peri interconnect
// and its peripheral slaves CLINT, PLIC, UART, SPI and GPIO (which also holds
// the GP-Special LEDs and switches). The core's instruction port goes straight
// to the memory; its data port goes through Dbus2peri to the memory and the
// peripherals. Interrupt wiring: UART, SPI and GPIO interrupt levels are PLIC
// sources 1, 2 and 3; the PLIC output is the core's machine external interrupt
// and the CLINT supplies the machine timer and software interrupts. All chip
// pins are plain ports; pads are outside this module. Program memory is loaded
// by whatever surrounds the design (in simulation, the testbench writes the
// banks); execution starts at 0x8000_0000 after the asynchronous active-high
// reset. The block set follows the paper; interrupt wiring and the instruction
// path are this design's own choices.
module rvmcu_top
  import rvmcu_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // UART
  output logic        uart_tx,
  input  logic        uart_rx,
  // SPI
  output logic        spi_sclk,
  output logic        spi_mosi,
  input  logic        spi_miso,
  output logic        spi_cs_n,
  // GPIO ports A (7:0), B (15:8), C (23:16)
  input  logic [23:0] gpio_in,
  output logic [23:0] gpio_out,
  output logic [23:0] gpio_oe,
  // GP-Special
  input  logic [15:0] switches,
  output logic [15:0] leds
);

  logic [31:0] imem_addr, imem_rdata;
  logic        imem_en;
  dbus_req_t   core_req;
  dbus_rsp_t   core_rsp;
  dbus_req_t   s_req [N_SLAVES];
  dbus_rsp_t   s_rsp [N_SLAVES];
  logic        irq_mext, irq_mtimer, irq_msoft;
  logic        uart_irq, spi_irq, gpio_irq;

  pipeline_top u_core (
    .clk(clk), .rst(rst),
    .imem_addr(imem_addr), .imem_en(imem_en), .imem_rdata(imem_rdata),
    .dbus_req(core_req), .dbus_rsp(core_rsp),
    .irq_mext(irq_mext), .irq_mtimer(irq_mtimer), .irq_msoft(irq_msoft)
  );

  dbus2peri u_dbus (
    .clk(clk), .rst(rst), .m_req(core_req), .m_rsp(core_rsp), .s_req(s_req), .s_rsp(s_rsp)
  );

  mem_top u_mem (
    .clk(clk), .rst(rst), .imem_en(imem_en), .imem_addr(imem_addr), .imem_rdata(imem_rdata),
    .req(s_req[SL_MEM]), .rsp(s_rsp[SL_MEM])
  );

  clint u_clint (
    .clk(clk), .rst(rst), .req(s_req[SL_CLINT]), .rsp(s_rsp[SL_CLINT]),
    .irq_mtimer(irq_mtimer), .irq_msoft(irq_msoft)
  );

  plic u_plic (
    .clk(clk), .rst(rst), .req(s_req[SL_PLIC]), .rsp(s_rsp[SL_PLIC]),
    .src({gpio_irq, spi_irq, uart_irq}), .irq(irq_mext)
  );

  uart u_uart (
    .clk(clk), .rst(rst), .req(s_req[SL_UART]), .rsp(s_rsp[SL_UART]),
    .tx(uart_tx), .rx(uart_rx), .irq(uart_irq)
  );

  spi u_spi (
    .clk(clk), .rst(rst), .req(s_req[SL_SPI]), .rsp(s_rsp[SL_SPI]),
    .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso), .cs_n(spi_cs_n), .irq(spi_irq)
  );

  gpio u_gpio (
    .clk(clk), .rst(rst), .req(s_req[SL_GPIO]), .rsp(s_rsp[SL_GPIO]),
    .pin_in(gpio_in), .pin_out(gpio_out), .pin_oe(gpio_oe),
    .switches(switches), .leds(leds), .irq(gpio_irq)
  );

endmodule
