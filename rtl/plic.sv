// plic: platform-level interrupt controller for the peripheral interrupts.
//
// NSRC level-sensitive sources (source ids 1..NSRC; in this chip 1 = UART,
// 2 = SPI, 3 = GPIO) pass through a gateway each: while a source is high and
// not already being serviced, its pending bit is set. irq (the core's machine
// external interrupt) is high while some pending, enabled source has a priority
// above the threshold. Reading the claim register returns the id of the
// pending, enabled source of highest priority (lowest id on a tie; 0 if none),
// clears its pending bit and marks it in service; writing that id back to the
// same register (complete) ends the service, after which a still-high source
// becomes pending again. Registers (offsets within the 4 MiB window, the usual
// RISC-V PLIC layout): priority[id] 0x000000 + 4*id, pending 0x001000,
// enable 0x002000, threshold 0x200000, claim/complete 0x200004. One cycle read
// latency. The paper names the PLIC and says interrupts are level-sensitive;
// the rest is this design's choice following the RISC-V PLIC specification.
module plic
  import rvmcu_pkg::*;
#(
  parameter int unsigned NSRC   = 3,
  parameter int unsigned PRIO_W = 3
) (
  input  logic            clk,
  input  logic            rst,
  input  dbus_req_t       req,
  output dbus_rsp_t       rsp,
  input  logic [NSRC-1:0] src,
  output logic            irq
);

  logic [PRIO_W-1:0] prio [NSRC];
  logic [NSRC-1:0]   pending, enable, in_service;
  logic [PRIO_W-1:0] threshold;
  logic [21:0]       off;
  logic [31:0]       rdata, best_id;
  logic [PRIO_W-1:0] best_prio;
  logic              claim_rd, complete_wr;

  assign off = req.addr[21:0];

  // highest-priority pending and enabled source
  always_comb begin
    best_id   = '0;
    best_prio = '0;
    for (int i = 0; i < NSRC; i++)
      if (pending[i] && enable[i] && prio[i] > best_prio) begin
        best_prio = prio[i];
        best_id   = 32'(i + 1);
      end
  end

  assign irq = (best_id != 0) && (best_prio > threshold);

  always_comb begin
    rdata = '0;
    if (off == 22'h001000)      rdata = 32'({pending, 1'b0});
    else if (off == 22'h002000) rdata = 32'({enable, 1'b0});
    else if (off == 22'h200000) rdata = 32'(threshold);
    else if (off == 22'h200004) rdata = best_id;
    else
      for (int i = 0; i < NSRC; i++)
        if (off == 22'(4 * (i + 1))) rdata = 32'(prio[i]);
  end

  assign claim_rd    = req.valid && !req.we && off == 22'h200004;
  assign complete_wr = req.valid && req.we && off == 22'h200004;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      for (int i = 0; i < NSRC; i++) prio[i] <= '0;
      pending    <= '0;
      enable     <= '0;
      in_service <= '0;
      threshold  <= '0;
      rsp        <= DBUS_RSP_IDLE;
    end else begin
      rsp.valid <= req.valid;
      if (req.valid && !req.we) rsp.rdata <= rdata;
      // gateways: a high source not in service becomes pending
      for (int i = 0; i < NSRC; i++)
        if (src[i] && !in_service[i]) pending[i] <= 1'b1;
      if (claim_rd && best_id != 0) begin
        pending[best_id - 1]    <= 1'b0;
        in_service[best_id - 1] <= 1'b1;
      end
      if (complete_wr && req.wdata != 0 && req.wdata <= NSRC)
        in_service[req.wdata - 1] <= 1'b0;
      if (req.valid && req.we) begin
        if (off == 22'h002000)      enable    <= req.wdata[NSRC:1];
        else if (off == 22'h200000) threshold <= req.wdata[PRIO_W-1:0];
        else
          for (int i = 0; i < NSRC; i++)
            if (off == 22'(4 * (i + 1))) prio[i] <= req.wdata[PRIO_W-1:0];
      end
    end
  end

endmodule
