// dbus2peri: the data-bus interconnect between the core and its six slaves.
//
// The paper's block diagram hangs the Memory, CLINT, PLIC, UART, SPI and GPIO
// on one bus, Dbus2peri, driven by the processor core. This module decodes the
// request address combinationally and forwards the request to exactly one
// slave (the others see valid low); it remembers which slave was addressed and,
// one cycle later, returns that slave's response to the core. An address that
// maps to no slave is answered with zero read data and its writes are dropped.
// Memory map (this design's choice): memory 0x8000_0000-0x8FFF_FFFF, CLINT
// 0x0200_0000 (64 KiB), PLIC 0x0C00_0000 (4 MiB), UART 0x9000_0000, SPI
// 0x9000_1000, GPIO 0x9000_2000 (4 KiB each). Slave order in s_req/s_rsp
// follows slave_e in rvmcu_pkg.
module dbus2peri
  import rvmcu_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  dbus_req_t m_req,
  output dbus_rsp_t m_rsp,
  output dbus_req_t s_req [N_SLAVES],
  input  dbus_rsp_t s_rsp [N_SLAVES]
);

  slave_e sel, sel_q;
  logic   valid_q;

  always_comb begin
    logic [31:0] a;
    a = m_req.addr;
    if (a[31:28] == MEM_BASE[31:28])         sel = SL_MEM;
    else if (a[31:16] == CLINT_BASE[31:16])  sel = SL_CLINT;
    else if (a[31:22] == PLIC_BASE[31:22])   sel = SL_PLIC;
    else if (a[31:12] == UART_BASE[31:12])   sel = SL_UART;
    else if (a[31:12] == SPI_BASE[31:12])    sel = SL_SPI;
    else if (a[31:12] == GPIO_BASE[31:12])   sel = SL_GPIO;
    else                                     sel = SL_NONE;
  end

  always_comb begin
    for (int i = 0; i < N_SLAVES; i++) begin
      s_req[i]       = m_req;
      s_req[i].valid = m_req.valid && (sel == slave_e'(i));
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      sel_q   <= SL_NONE;
      valid_q <= 1'b0;
    end else begin
      valid_q <= m_req.valid;
      if (m_req.valid) sel_q <= sel;
    end
  end

  always_comb begin
    m_rsp.valid = valid_q;
    m_rsp.rdata = '0;
    for (int i = 0; i < N_SLAVES; i++)
      if (sel_q == slave_e'(i)) m_rsp.rdata = s_rsp[i].rdata;
  end

endmodule
