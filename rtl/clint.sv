// clint: core-local interruptor of the microcontroller.
//
// Holds the 64-bit machine timer mtime, which counts up by one every clock,
// the 64-bit compare register mtimecmp and the software-interrupt bit msip.
// irq_mtimer is high while mtime >= mtimecmp (a level; software clears it by
// writing a larger mtimecmp) and irq_msoft follows msip. Bus slave with the
// usual RISC-V CLINT layout (offsets within the 64 KiB window): msip 0x0000,
// mtimecmp 0x4000 (low) / 0x4004 (high), mtime 0xBFF8 (low) / 0xBFFC (high).
// Reads return data one cycle after the request; writes honour byte strobes.
// mtimecmp resets to all ones so no timer interrupt is pending after reset.
// The paper names the CLINT only; the layout and behaviour are the customary
// RISC-V ones, chosen here.
module clint
  import rvmcu_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  dbus_req_t req,
  output dbus_rsp_t rsp,
  output logic      irq_mtimer,
  output logic      irq_msoft
);

  logic [63:0] mtime, mtimecmp;
  logic        msip;
  logic [15:0] off;
  logic [31:0] rdata;

  assign off = req.addr[15:0];

  always_comb begin
    unique case (off)
      16'h0000: rdata = {31'h0, msip};
      16'h4000: rdata = mtimecmp[31:0];
      16'h4004: rdata = mtimecmp[63:32];
      16'hBFF8: rdata = mtime[31:0];
      16'hBFFC: rdata = mtime[63:32];
      default:  rdata = '0;
    endcase
  end

  wire wr = req.valid && req.we;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      mtime     <= '0;
      mtimecmp  <= '1;
      msip      <= 1'b0;
      rsp       <= DBUS_RSP_IDLE;
    end else begin
      rsp.valid <= req.valid;
      if (req.valid && !req.we) rsp.rdata <= rdata;
      mtime <= mtime + 64'd1;
      if (wr) begin
        unique case (off)
          16'h0000: if (req.strb[0]) msip <= req.wdata[0];
          16'h4000: mtimecmp[31:0]  <= apply_strb(mtimecmp[31:0],  req.wdata, req.strb);
          16'h4004: mtimecmp[63:32] <= apply_strb(mtimecmp[63:32], req.wdata, req.strb);
          16'hBFF8: mtime[31:0]     <= apply_strb(mtime[31:0],     req.wdata, req.strb);
          16'hBFFC: mtime[63:32]    <= apply_strb(mtime[63:32],    req.wdata, req.strb);
          default: ;
        endcase
      end
    end
  end

  assign irq_mtimer = (mtime >= mtimecmp);
  assign irq_msoft  = msip;

endmodule
