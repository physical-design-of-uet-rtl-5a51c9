// tb_pipeline_top: instruction-set test of the processor core on its own.
//
// The core runs a self-contained RV32IMA + Zba/Zbb/Zbc/Zbs + Zicsr program
// (isa_prog.hex, 708 words at 0x8000_0000) against a simple memory model with
// the same one-cycle timing as the chip's memory. The program exercises every
// integer, bit-manipulation, multiply/divide, load/store, branch/jump, atomic
// and CSR instruction class and seven traps (ECALL, illegal word, EBREAK, write
// to a read-only CSR, misaligned load, misaligned store, misaligned jump
// target), storing each result to a 192-word signature at
// 0x8000_0800. It finishes by storing 1 to 0x8000_0F00. The testbench then
// compares the signature word by word with isa_sig.hex, which holds the
// signature produced by an independent reference instruction-set simulator
// for the same program. It also checks that the pipeline stalled exactly 33
// cycles per division and one per AMO, and that taken branches flushed it.
`timescale 1ns/1ps
module tb_pipeline_top;
  import rvmcu_pkg::*;

  localparam int WORDS = 1024;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [31:0] imem_addr, imem_rdata;
  logic        imem_en;
  dbus_req_t   dreq;
  dbus_rsp_t   drsp;

  logic [31:0] mem [WORDS];
  logic [31:0] sig [192];
  int checks = 0, failures = 0;
  int cycles = 0, stall_cycles = 0, flushes = 0;
  bit done = 0;

  pipeline_top dut (
    .clk(clk), .rst(rst), .imem_addr(imem_addr), .imem_en(imem_en), .imem_rdata(imem_rdata),
    .dbus_req(dreq), .dbus_rsp(drsp), .irq_mext(1'b0), .irq_mtimer(1'b0), .irq_msoft(1'b0)
  );

  // memory model: one-cycle synchronous ports, byte strobes
  always_ff @(posedge clk) begin
    if (imem_en) imem_rdata <= mem[imem_addr[11:2]];
    drsp.valid <= dreq.valid;
    if (dreq.valid) begin
      if (dreq.we) begin
        for (int b = 0; b < 4; b++)
          if (dreq.strb[b]) mem[dreq.addr[11:2]][8*b +: 8] <= dreq.wdata[8*b +: 8];
        if (dreq.addr == 32'h8000_0F00) done <= 1;
      end else begin
        drsp.rdata <= mem[dreq.addr[11:2]];
      end
    end
  end

  always @(posedge clk) if (!rst) begin
    cycles++;
    if (!imem_en) stall_cycles++;
    if (dut.fire && dut.jump) flushes++;
  end

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = 32'h0;
    $readmemh("tb/isa_prog.hex", mem, 0, 707);
    $readmemh("tb/isa_sig.hex", sig);
    drsp = '0;
    imem_rdata = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    wait (done);
    repeat (2) @(posedge clk);
    for (int i = 0; i < 192; i++) begin
      checks++;
      if (mem[512 + i] !== sig[i]) begin
        failures++;
        $display("signature word %0d: got %08x expected %08x", i, mem[512 + i], sig[i]);
      end
    end
    // the program holds 10 divisions (33 stall cycles each) and 9 AMOs
    // (one stall cycle each); nothing else may stall
    checks++;
    if (stall_cycles != 10 * 33 + 9) begin
      failures++;
      $display("too few stall cycles: %0d", stall_cycles);
    end
    checks++;
    if (flushes < 10) begin
      failures++;
      $display("too few taken branches/jumps: %0d", flushes);
    end
    $display("cycles=%0d stall_cycles=%0d flushes=%0d", cycles, stall_cycles, flushes);
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
