// gpio: general-purpose I/O ports A, B and C plus the GP-Special LEDs/switches.
//
// PORTS ports of PINS pins each (the paper's three 8-pin ports A, B, C). Every
// pin can be an input or an output (DIR bit 1 = output, driving OUT onto the
// pad through pin_out/pin_oe). Pad inputs pass a two-flop synchroniser and are
// readable in IN. Interrupts are level-sensitive and configurable per pin: a
// pin requests when its IE bit is set and its synchronised level equals its
// POL bit (1 = active high, 0 = active low); irq is the OR of all requests and
// goes to the PLIC, and IRQ_STATUS shows which pins request. Register map
// (offsets within the 4 KiB window): port p at 0x10*p: +0x0 DIR, +0x4 OUT,
// +0x8 IN (read only), +0xC IE; 0x30 + 4*p POL; 0x40 IRQ_STATUS (pin 8*p+i at
// bit 8*p+i); GP-Special at 0x100 LEDS and 0x104 SWITCHES (read only). One cycle
// read latency; writes honour byte strobes. Port count, width and level-sensitive
// interrupts are the paper's; the register map is this design's own choice.
module gpio
  import rvmcu_pkg::*;
#(
  parameter int unsigned PORTS = 3,
  parameter int unsigned PINS  = 8
) (
  input  logic                  clk,
  input  logic                  rst,
  input  dbus_req_t             req,
  output dbus_rsp_t             rsp,
  input  logic [PORTS*PINS-1:0] pin_in,
  output logic [PORTS*PINS-1:0] pin_out,
  output logic [PORTS*PINS-1:0] pin_oe,
  input  logic [15:0]           switches,
  output logic [15:0]           leds,
  output logic                  irq
);

  logic [PINS-1:0] dir [PORTS];
  logic [PINS-1:0] dout [PORTS];
  logic [PINS-1:0] ie [PORTS];
  logic [PINS-1:0] pol [PORTS];
  logic [PORTS*PINS-1:0] in_meta, in_sync, req_lvl;
  logic [11:0] off;
  logic [31:0] rdata;
  logic [15:0] led_q, sw_q;
  logic        led_we;

  assign off = req.addr[11:0];

  for (genvar p = 0; p < PORTS; p++) begin : g_port
    assign pin_out[p*PINS +: PINS] = dout[p];
    assign pin_oe[p*PINS +: PINS]  = dir[p];
    assign req_lvl[p*PINS +: PINS] = ie[p] & ~(in_sync[p*PINS +: PINS] ^ pol[p]);
  end

  assign irq = |req_lvl;

  always_comb begin
    rdata = '0;
    for (int p = 0; p < PORTS; p++) begin
      if (off == 12'(16 * p))      rdata = 32'(dir[p]);
      if (off == 12'(16 * p + 4))  rdata = 32'(dout[p]);
      if (off == 12'(16 * p + 8))  rdata = 32'(in_sync[p*PINS +: PINS]);
      if (off == 12'(16 * p + 12)) rdata = 32'(ie[p]);
      if (off == 12'(48 + 4 * p))  rdata = 32'(pol[p]);
    end
    if (off == 12'h040) rdata = 32'(req_lvl);
    if (off == 12'h100) rdata = {16'h0, led_q};
    if (off == 12'h104) rdata = {16'h0, sw_q};
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      for (int p = 0; p < PORTS; p++) begin
        dir[p]  <= '0;
        dout[p] <= '0;
        ie[p]   <= '0;
        pol[p]  <= '1;
      end
      in_meta <= '0;
      in_sync <= '0;
      rsp     <= DBUS_RSP_IDLE;
    end else begin
      rsp.valid <= req.valid;
      if (req.valid && !req.we) rsp.rdata <= rdata;
      in_meta <= pin_in;
      in_sync <= in_meta;
      if (req.valid && req.we && req.strb[0]) begin
        for (int p = 0; p < PORTS; p++) begin
          if (off == 12'(16 * p))      dir[p]  <= req.wdata[PINS-1:0];
          if (off == 12'(16 * p + 4))  dout[p] <= req.wdata[PINS-1:0];
          if (off == 12'(16 * p + 12)) ie[p]   <= req.wdata[PINS-1:0];
          if (off == 12'(48 + 4 * p))  pol[p]  <= req.wdata[PINS-1:0];
        end
      end
    end
  end

  assign led_we = req.valid && req.we && off == 12'h100;

  gp_special #(.N_LED(16), .N_SW(16)) u_gps (
    .clk(clk), .rst(rst), .we(led_we), .wdata(req.wdata[15:0]), .wstrb(req.strb[1:0]),
    .switches(switches), .leds(leds), .led_q(led_q), .sw_q(sw_q)
  );

endmodule
