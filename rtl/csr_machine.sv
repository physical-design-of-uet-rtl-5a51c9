// csr_machine: machine-mode control and status registers and trap logic.
//
// The microcontroller runs in machine mode only, so this block holds just the
// machine-level CSRs: mstatus (MIE, MPIE; MPP reads as 11), misa, mie, mip,
// mtvec (direct mode), mscratch, mepc, mcause, mtval, the 64-bit mcycle and
// minstret counters with their user-level read-only aliases, and the read-only
// ID registers. CSR instructions are served in the Decode/Execute stage: the
// old value is returned combinationally on csr_rdata and the new value is
// written on the clock edge. csr_illegal flags an unknown address or a write
// to a read-only register. Interrupts: irq_pending is high when a pending and
// enabled interrupt exists and mstatus.MIE is set; irq_cause names it with
// external > software > timer priority, as the privileged specification orders
// them. On trap (exception or taken interrupt) mepc/mcause/mtval are written
// and MIE is stacked into MPIE; mret restores it. Machine mode only is the
// paper's; the register set follows the RISC-V privileged specification.
module csr_machine
  import rvmcu_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // CSR instruction
  input  logic        csr_en,      // valid CSR access this cycle
  input  logic [11:0] csr_addr,
  input  logic [1:0]  csr_cmd,     // 01 write, 10 set, 11 clear
  input  logic        csr_wr,      // 0 for CSRRS/RC with rs1=x0 (read only)
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  output logic        csr_illegal,
  // traps
  input  logic        trap,        // enter a trap this cycle
  input  logic [31:0] trap_cause,
  input  logic [31:0] trap_pc,
  input  logic [31:0] trap_tval,
  input  logic        mret,
  input  logic        retire,      // one instruction completed
  // interrupts
  input  logic        irq_mext,
  input  logic        irq_mtimer,
  input  logic        irq_msoft,
  output logic        irq_pending,
  output logic [31:0] irq_cause,
  output logic [31:0] mtvec,
  output logic [31:0] mepc
);

  localparam logic [31:0] MISA_VAL = 32'h4000_1103;  // RV32 A B I M

  logic        mstatus_mie, mstatus_mpie;
  logic [31:0] mie, mscratch, mcause, mtval;
  logic [63:0] mcycle, minstret;
  logic [31:0] mip, mstatus, newval;
  logic        ro, known;

  assign mip = {20'h0, irq_mext, 3'b0, irq_mtimer, 3'b0, irq_msoft, 3'b0};
  assign mstatus = {19'h0, 2'b11, 3'b0, mstatus_mpie, 3'b0, mstatus_mie, 3'b0};

  // read mux
  always_comb begin
    known = 1'b1;
    unique case (csr_addr)
      CSR_MSTATUS:   csr_rdata = mstatus;
      CSR_MISA:      csr_rdata = MISA_VAL;
      CSR_MIE:       csr_rdata = mie;
      CSR_MTVEC:     csr_rdata = mtvec;
      CSR_MSCRATCH:  csr_rdata = mscratch;
      CSR_MEPC:      csr_rdata = mepc;
      CSR_MCAUSE:    csr_rdata = mcause;
      CSR_MTVAL:     csr_rdata = mtval;
      CSR_MIP:       csr_rdata = mip;
      CSR_MCYCLE,  CSR_CYCLE:    csr_rdata = mcycle[31:0];
      CSR_MCYCLEH, CSR_CYCLEH:   csr_rdata = mcycle[63:32];
      CSR_MINSTRET,  CSR_INSTRET:  csr_rdata = minstret[31:0];
      CSR_MINSTRETH, CSR_INSTRETH: csr_rdata = minstret[63:32];
      CSR_MVENDORID, CSR_MARCHID, CSR_MIMPID, CSR_MHARTID: csr_rdata = 32'h0;
      default: begin
        csr_rdata = 32'h0;
        known = 1'b0;
      end
    endcase
  end

  assign ro = (csr_addr[11:10] == 2'b11);  // read-only address space
  assign csr_illegal = csr_en && (!known || (ro && csr_wr));

  always_comb begin
    unique case (csr_cmd)
      2'b10:   newval = csr_rdata | csr_wdata;
      2'b11:   newval = csr_rdata & ~csr_wdata;
      default: newval = csr_wdata;
    endcase
  end

  wire do_write = csr_en && csr_wr && !csr_illegal && !trap;

  // interrupt selection
  logic [31:0] act;
  assign act = mip & mie;
  always_comb begin
    irq_pending = mstatus_mie && (act[11] || act[3] || act[7]);
    if (act[11])     irq_cause = IRQ_MEXT;
    else if (act[3]) irq_cause = IRQ_MSOFT;
    else             irq_cause = IRQ_MTIMER;
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      mstatus_mie  <= 1'b0;
      mstatus_mpie <= 1'b0;
      mie          <= '0;
      mtvec        <= '0;
      mscratch     <= '0;
      mepc         <= '0;
      mcause       <= '0;
      mtval        <= '0;
      mcycle       <= '0;
      minstret     <= '0;
    end else begin
      mcycle <= mcycle + 64'd1;
      if (retire) minstret <= minstret + 64'd1;
      if (trap) begin
        mepc         <= {trap_pc[31:2], 2'b00};
        mcause       <= trap_cause;
        mtval        <= trap_tval;
        mstatus_mpie <= mstatus_mie;
        mstatus_mie  <= 1'b0;
      end else if (mret) begin
        mstatus_mie  <= mstatus_mpie;
        mstatus_mpie <= 1'b1;
      end else if (do_write) begin
        unique case (csr_addr)
          CSR_MSTATUS: begin
            mstatus_mie  <= newval[3];
            mstatus_mpie <= newval[7];
          end
          CSR_MIE:       mie      <= newval & 32'h0000_0888;
          CSR_MTVEC:     mtvec    <= {newval[31:2], 2'b00};
          CSR_MSCRATCH:  mscratch <= newval;
          CSR_MEPC:      mepc     <= {newval[31:2], 2'b00};
          CSR_MCAUSE:    mcause   <= newval;
          CSR_MTVAL:     mtval    <= newval;
          CSR_MCYCLE:    mcycle[31:0]    <= newval;
          CSR_MCYCLEH:   mcycle[63:32]   <= newval;
          CSR_MINSTRET:  minstret[31:0]  <= newval;
          CSR_MINSTRETH: minstret[63:32] <= newval;
          default: ;
        endcase
      end
    end
  end

endmodule
