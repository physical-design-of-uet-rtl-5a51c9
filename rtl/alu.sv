// alu: combinational integer unit of the core.
//
// Computes every RV32I register/immediate operation plus the Zba (shift-add),
// Zbb (basic bit manipulation), Zbc (carry-less multiply) and Zbs (single-bit)
// operations that the microcontroller adds to RV32IMA. The operation is chosen
// by an alu_op_e code from the decoder; operand b is already the immediate for
// I-type forms. The result is purely combinational (zero latency) and is
// consumed in the Decode/Execute stage. The list of extensions follows the
// paper; the operation encoding and the loop-based carry-less multiplier are
// this design's own choices.
module alu
  import rvmcu_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic [4:0]  shamt;
  logic [63:0] clmul_full;
  logic [5:0]  lz, tz, pc;

  assign shamt = b[4:0];

  // Carry-less product of a and b, all 64 bits.
  always_comb begin
    clmul_full = '0;
    for (int i = 0; i < 32; i++)
      if (b[i]) clmul_full = clmul_full ^ ({32'h0, a} << i);
  end

  // Leading zeros, trailing zeros and population count.
  always_comb begin
    lz = 6'd32;
    for (int i = 0; i < 32; i++)
      if (a[i]) lz = 6'(31 - i);
    tz = 6'd32;
    for (int i = 31; i >= 0; i--)
      if (a[i]) tz = 6'(i);
    pc = '0;
    for (int i = 0; i < 32; i++)
      pc = pc + 6'(a[i]);
  end

  always_comb begin
    unique case (op)
      ALU_ADD:    y = a + b;
      ALU_SUB:    y = a - b;
      ALU_SLL:    y = a << shamt;
      ALU_SLT:    y = {31'h0, $signed(a) < $signed(b)};
      ALU_SLTU:   y = {31'h0, a < b};
      ALU_XOR:    y = a ^ b;
      ALU_SRL:    y = a >> shamt;
      ALU_SRA:    y = 32'($signed(a) >>> shamt);
      ALU_OR:     y = a | b;
      ALU_AND:    y = a & b;
      ALU_PASSB:  y = b;
      ALU_SH1ADD: y = (a << 1) + b;
      ALU_SH2ADD: y = (a << 2) + b;
      ALU_SH3ADD: y = (a << 3) + b;
      ALU_ANDN:   y = a & ~b;
      ALU_ORN:    y = a | ~b;
      ALU_XNOR:   y = ~(a ^ b);
      ALU_CLZ:    y = {26'h0, lz};
      ALU_CTZ:    y = {26'h0, tz};
      ALU_CPOP:   y = {26'h0, pc};
      ALU_MAX:    y = ($signed(a) < $signed(b)) ? b : a;
      ALU_MAXU:   y = (a < b) ? b : a;
      ALU_MIN:    y = ($signed(a) < $signed(b)) ? a : b;
      ALU_MINU:   y = (a < b) ? a : b;
      ALU_SEXTB:  y = {{24{a[7]}}, a[7:0]};
      ALU_SEXTH:  y = {{16{a[15]}}, a[15:0]};
      ALU_ZEXTH:  y = {16'h0, a[15:0]};
      ALU_ROL:    y = (a << shamt) | (a >> (6'd32 - {1'b0, shamt}));
      ALU_ROR:    y = (a >> shamt) | (a << (6'd32 - {1'b0, shamt}));
      ALU_ORCB:   y = {{8{|a[31:24]}}, {8{|a[23:16]}}, {8{|a[15:8]}}, {8{|a[7:0]}}};
      ALU_REV8:   y = {a[7:0], a[15:8], a[23:16], a[31:24]};
      ALU_CLMUL:  y = clmul_full[31:0];
      ALU_CLMULH: y = clmul_full[63:32];
      ALU_CLMULR: y = clmul_full[62:31];
      ALU_BCLR:   y = a & ~(32'h1 << shamt);
      ALU_BEXT:   y = {31'h0, a[shamt]};
      ALU_BINV:   y = a ^ (32'h1 << shamt);
      ALU_BSET:   y = a | (32'h1 << shamt);
      default:    y = '0;
    endcase
  end

endmodule
