// tb_csr_machine: machine-mode CSR unit, traps and interrupt selection.
//
// Directed sequence: CSRRW/RS/RC on mscratch, mtvec alignment, misa value,
// illegal access detection (unknown CSR, write to a read-only CSR), mip
// following the three interrupt inputs, irq_pending gated by mie and
// mstatus.MIE with external > software > timer priority, trap entry (mepc,
// mcause, mtval, MIE stacked into MPIE), MRET, and the mcycle/minstret counters.
`timescale 1ns/1ps
module tb_csr_machine;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1;
  logic csr_en = 0, csr_wr = 0, csr_illegal, trap = 0, mret = 0, retire = 0;
  logic [11:0] csr_addr = 0;
  logic [1:0]  csr_cmd = 0;
  logic [31:0] csr_wdata = 0, csr_rdata, trap_cause = 0, trap_pc = 0, trap_tval = 0;
  logic irq_mext = 0, irq_mtimer = 0, irq_msoft = 0, irq_pending;
  logic [31:0] irq_cause, mtvec, mepc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  csr_machine dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  // one CSR instruction; returns the old value
  task automatic csr(logic [11:0] adr, logic [1:0] cmd, logic [31:0] val, output logic [31:0] old);
    @(negedge clk);
    csr_en = 1; csr_addr = adr; csr_cmd = cmd; csr_wr = 1; csr_wdata = val;
    #1 old = csr_rdata;
    @(negedge clk);
    csr_en = 0; csr_wr = 0;
  endtask

  task automatic rd(logic [11:0] adr, output logic [31:0] v);
    csr_addr = adr; csr_en = 1; csr_wr = 0; #1 v = csr_rdata; csr_en = 0;
  endtask

  initial begin
    logic [31:0] v, c0, c1;
    repeat (2) @(negedge clk);
    rst = 0;
    csr(CSR_MSCRATCH, 2'b01, 32'h1234_5678, v);
    rd(CSR_MSCRATCH, v); check("mscratch write", v, 32'h1234_5678);
    csr(CSR_MSCRATCH, 2'b10, 32'h0000_000f, v); check("csrrs old", v, 32'h1234_5678);
    rd(CSR_MSCRATCH, v); check("csrrs", v, 32'h1234_567f);
    csr(CSR_MSCRATCH, 2'b11, 32'h1200_0000, v);
    rd(CSR_MSCRATCH, v); check("csrrc", v, 32'h0034_567f);
    csr(CSR_MTVEC, 2'b01, 32'h8000_0103, v);
    check("mtvec aligned", mtvec, 32'h8000_0100);
    rd(CSR_MISA, v); check("misa", v, 32'h4000_1103);
    // illegal accesses
    csr_en = 1; csr_wr = 1; csr_addr = 12'h7c0; #1 check("unknown csr illegal", 32'(csr_illegal), 1);
    csr_addr = CSR_MHARTID; #1 check("write to RO illegal", 32'(csr_illegal), 1);
    csr_wr = 0; #1 check("read of RO legal", 32'(csr_illegal), 0);
    csr_en = 0;
    // interrupts
    irq_mtimer = 1; irq_msoft = 1; irq_mext = 1;
    rd(CSR_MIP, v); check("mip", v, 32'h888);
    #1 check("no irq while mie=0", 32'(irq_pending), 0);
    csr(CSR_MIE, 2'b01, 32'hffff_ffff, v);
    rd(CSR_MIE, v); check("mie writable bits", v, 32'h888);
    #1 check("no irq while MIE=0", 32'(irq_pending), 0);
    csr(CSR_MSTATUS, 2'b10, 32'h8, v);
    #1 check("irq pending", 32'(irq_pending), 1);
    check("ext first", irq_cause, IRQ_MEXT);
    irq_mext = 0; #1 check("soft next", irq_cause, IRQ_MSOFT);
    irq_msoft = 0; #1 check("timer last", irq_cause, IRQ_MTIMER);
    // trap entry
    @(negedge clk);
    trap = 1; trap_cause = IRQ_MTIMER; trap_pc = 32'h8000_0040; trap_tval = 32'h55;
    @(negedge clk);
    trap = 0;
    check("mepc", mepc, 32'h8000_0040);
    rd(CSR_MCAUSE, v); check("mcause", v, IRQ_MTIMER);
    rd(CSR_MTVAL, v);  check("mtval", v, 32'h55);
    rd(CSR_MSTATUS, v); check("MIE stacked", v, 32'h0000_1880);
    #1 check("irq masked in trap", 32'(irq_pending), 0);
    mret = 1; @(negedge clk); mret = 0;
    rd(CSR_MSTATUS, v); check("mret restores MIE", v, 32'h0000_1888);
    // counters
    rd(CSR_MCYCLE, c0);
    repeat (10) @(negedge clk);
    rd(CSR_MCYCLE, c1); check("mcycle +10", c1 - c0, 10);
    rd(CSR_MINSTRET, c0);
    retire = 1; repeat (7) @(negedge clk); retire = 0;
    rd(CSR_MINSTRET, c1); check("minstret +7", c1 - c0, 7);
    csr(CSR_MCYCLEH, 2'b01, 32'h5, v);
    rd(CSR_CYCLEH, v); check("cycleh alias", v, 32'h5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
