// tb_regfile: register file against a shadow array.
//
// Random writes and reads on both ports are compared with a shadow copy kept by
// the testbench. Checks: x0 reads zero after writes to it, a write is visible
// in the same cycle on a read of the same register (write-through), and every
// other register holds its last written value.
`timescale 1ns/1ps
module tb_regfile;
  logic clk = 0, we;
  logic [4:0] rs1, rs2, rd;
  logic [31:0] rd1, rd2, wd;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  regfile dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  initial begin
    we = 0; rs1 = 0; rs2 = 0; rd = 0; wd = 0;
    // fill every register
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      we = 1; rd = 5'(i); wd = $urandom;
      shadow[i] = (i == 0) ? 32'h0 : wd;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); rd = 5'($urandom); wd = $urandom;
      rs1 = ($urandom_range(0, 3) == 0) ? rd : 5'($urandom);
      rs2 = 5'($urandom);
      #1;
      check("rd1", rd1, (we && rd == rs1 && rs1 != 0) ? wd : shadow[rs1]);
      check("rd2", rd2, (we && rd == rs2 && rs2 != 0) ? wd : shadow[rs2]);
      if (we && rd != 0) shadow[rd] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
