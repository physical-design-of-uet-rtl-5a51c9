// tb_alu: random test of every ALU operation against a reference model.
//
// For each of the 38 operations the testbench applies corner operands (0, 1,
// all ones, 0x8000_0000) and 300 random pairs, and compares y with a model
// written here from the RISC-V instruction definitions (bit loops and
// {a,a} double-width shifts, not the ALU's own formulation).
`timescale 1ns/1ps
module tb_alu;
  import rvmcu_pkg::*;

  alu_op_e     op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  alu dut (.op(op), .a(a), .b(b), .y(y));

  function automatic logic [31:0] ref_model(alu_op_e o, logic [31:0] x, logic [31:0] z);
    logic [63:0] cl, dbl;
    int s, n;
    s   = int'(z[4:0]);
    dbl = {x, x};
    cl  = '0;
    for (int i = 0; i < 32; i++) if (z[i]) for (int j = 0; j < 32; j++) cl[i+j] ^= x[j];
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x + ~z + 1;
      ALU_SLL:  return x << s;
      ALU_SLT:  return (x[31] != z[31]) ? 32'(x[31]) : 32'(x < z);
      ALU_SLTU: return 32'(x < z);
      ALU_XOR:  return x ^ z;
      ALU_SRL:  return x >> s;
      ALU_SRA:  begin logic [63:0] e; e = {{32{x[31]}}, x} >> s; return e[31:0]; end
      ALU_OR:   return x | z;
      ALU_AND:  return x & z;
      ALU_PASSB: return z;
      ALU_SH1ADD: return x * 2 + z;
      ALU_SH2ADD: return x * 4 + z;
      ALU_SH3ADD: return x * 8 + z;
      ALU_ANDN: return x & ~z;
      ALU_ORN:  return x | ~z;
      ALU_XNOR: return ~x ^ z;
      ALU_CLZ:  begin n = 0; while (n < 32 && !x[31-n]) n++; return n; end
      ALU_CTZ:  begin n = 0; while (n < 32 && !x[n]) n++; return n; end
      ALU_CPOP: return $countones(x);
      ALU_MAX:  return ($signed(x) > $signed(z)) ? x : z;
      ALU_MAXU: return (x > z) ? x : z;
      ALU_MIN:  return ($signed(x) > $signed(z)) ? z : x;
      ALU_MINU: return (x > z) ? z : x;
      ALU_SEXTB: return 32'($signed(x[7:0]));
      ALU_SEXTH: return 32'($signed(x[15:0]));
      ALU_ZEXTH: return x & 32'hffff;
      ALU_ROL:  begin logic [63:0] r; r = dbl << s; return r[63:32]; end
      ALU_ROR:  begin logic [63:0] r; r = dbl >> s; return r[31:0]; end
      ALU_ORCB: begin
        logic [31:0] r;
        for (int k = 0; k < 4; k++) r[8*k +: 8] = (x[8*k +: 8] != 0) ? 8'hff : 8'h00;
        return r;
      end
      ALU_REV8: return {<<8{x}};
      ALU_CLMUL:  return cl[31:0];
      ALU_CLMULH: return cl[63:32];
      ALU_CLMULR: return cl[62:31];
      ALU_BCLR: begin logic [31:0] r; r = x; r[s] = 1'b0; return r; end
      ALU_BEXT: return 32'(x[s]);
      ALU_BINV: begin logic [31:0] r; r = x; r[s] = ~r[s]; return r; end
      ALU_BSET: begin logic [31:0] r; r = x; r[s] = 1'b1; return r; end
      default:  return 'x;
    endcase
  endfunction

  task automatic apply(alu_op_e o, logic [31:0] x, logic [31:0] z);
    logic [31:0] e;
    op = o; a = x; b = z;
    #1;
    e = ref_model(o, x, z);
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 20) $display("FAIL %s a=%08x b=%08x y=%08x exp=%08x", o.name(), x, z, y, e);
    end
  endtask

  initial begin
    logic [31:0] corner [5] = '{32'h0, 32'h1, 32'hffff_ffff, 32'h8000_0000, 32'h0012_0034};
    for (int o = ALU_ADD; o <= ALU_BSET; o++) begin
      foreach (corner[i]) foreach (corner[j]) apply(alu_op_e'(o), corner[i], corner[j]);
      repeat (300) apply(alu_op_e'(o), $urandom, $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
