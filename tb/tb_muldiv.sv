// tb_muldiv: multiply/divide unit against 64-bit integer arithmetic.
//
// Multiplications are checked combinationally. Each division is started with a
// one-cycle start pulse; the testbench checks that busy rises, that done comes
// exactly 33 cycles after the start cycle, and that the result matches a model
// built from SystemVerilog's 64-bit signed/unsigned division with the RISC-V
// rules for division by zero and signed overflow. Corner operands and random
// operands are used.
`timescale 1ns/1ps
module tb_muldiv;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1, start = 0, busy, done;
  md_op_e op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  muldiv dut (.*);

  function automatic logic [31:0] ref_model(md_op_e o, logic [31:0] x, logic [31:0] z);
    longint sx, sz, ux, uz;
    sx = longint'($signed(x)); sz = longint'($signed(z));
    ux = longint'({32'h0, x}); uz = longint'({32'h0, z});
    case (o)
      MD_MUL:    return 32'(sx * sz);
      MD_MULH:   return 32'((sx * sz) >>> 32);
      MD_MULHSU: return 32'((sx * uz) >>> 32);
      MD_MULHU:  return 32'((ux * uz) >> 32);
      MD_DIV:    return (z == 0) ? 32'hffff_ffff : 32'(sx / sz);
      MD_DIVU:   return (z == 0) ? 32'hffff_ffff : 32'(ux / uz);
      MD_REM:    return (z == 0) ? x : 32'(sx % sz);
      MD_REMU:   return (z == 0) ? x : 32'(ux % uz);
      default:   return 'x;
    endcase
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %08x exp %08x (a=%08x b=%08x)", what, got, exp, a, b);
    end
  endtask

  task automatic run(md_op_e o, logic [31:0] x, logic [31:0] z);
    int lat;
    op = o; a = x; b = z;
    if (!o[2]) begin
      #1 check(o.name(), y, ref_model(o, x, z));
      return;
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    check("busy after start", 32'(busy), 1);
    lat = 1;
    while (!done && lat < 100) begin @(negedge clk); lat++; end
    check("divide latency", lat, 33);
    check(o.name(), y, ref_model(o, x, z));
    @(negedge clk);
  endtask

  initial begin
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_0000, 32'h7fff_ffff, 32'd7};
    a = 0; b = 0; op = MD_MUL;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int o = 0; o < 8; o++) begin
      foreach (corner[i]) foreach (corner[j]) run(md_op_e'(o), corner[i], corner[j]);
      repeat (40) run(md_op_e'(o), $urandom, (o[0]) ? $urandom : $urandom >> ($urandom % 32));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
