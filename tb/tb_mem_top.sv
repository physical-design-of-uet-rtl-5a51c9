// tb_mem_top: four-bank memory, both ports, byte strobes and bank mapping.
//
// Writes random words through the data port to all 1024 words (4 banks x 256),
// then reads them back through the data port and the instruction port, both
// with one-cycle latency, against a shadow array. Also checks byte-strobed
// writes, that a fetch and a data access to different words of the same bank
// in the same cycle both succeed, that the instruction output holds while the
// port is disabled, and that rsp.valid follows requests by one cycle.
`timescale 1ns/1ps
module tb_mem_top;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1, imem_en = 0;
  logic [31:0] imem_addr = 0, imem_rdata;
  dbus_req_t req = '0;
  dbus_rsp_t rsp;
  logic [31:0] shadow [1024];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mem_top dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  task automatic write(int w, logic [31:0] d, logic [3:0] s);
    @(negedge clk);
    req = '{valid: 1'b1, we: 1'b1, strb: s, addr: 32'h8000_0000 + 4 * w, wdata: d};
    for (int b = 0; b < 4; b++) if (s[b]) shadow[w][8*b +: 8] = d[8*b +: 8];
    @(negedge clk);
    req = '0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int w = 0; w < 1024; w++) write(w, $urandom, 4'hF);
    for (int n = 0; n < 300; n++) write($urandom_range(0, 1023), $urandom, 4'($urandom));
    // read back through both ports at once, different words of the same bank
    for (int w = 0; w < 1024; w++) begin
      int iw;
      iw = (w & ~255) | ((w + 17) & 255);
      @(negedge clk);
      req = '{valid: 1'b1, we: 1'b0, strb: 4'h0, addr: 32'h8000_0000 + 4 * w, wdata: 32'h0};
      imem_en = 1; imem_addr = 32'h8000_0000 + 4 * iw;
      @(negedge clk);
      req = '0; imem_en = 0;
      check("rsp.valid", 32'(rsp.valid), 1);
      check("data port read", rsp.rdata, shadow[w]);
      check("instruction port read", imem_rdata, shadow[iw]);
      imem_addr = 32'h8000_0000;
      @(negedge clk);
      check("rsp.valid drops", 32'(rsp.valid), 0);
      check("instruction output holds", imem_rdata, shadow[iw]);
    end
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
