// muldiv: the M-extension unit of the core.
//
// Multiplications (MUL, MULH, MULHSU, MULHU) are combinational: y is valid in
// the same cycle as the operands and done is not used for them. Divisions
// (DIV, DIVU, REM, REMU) run on a radix-2 restoring divider: a one-cycle start
// pulse latches the operands, 32 steps follow, and done is high for one cycle
// with the result on y (33 cycles after start, counting the start cycle as 0..
// done in cycle 33). busy is high from the cycle after start until done. The
// core holds the instruction in Decode/Execute meanwhile. Division by zero and
// signed overflow give the results the RISC-V specification prescribes. The
// paper only names the M extension; the structure is this design's own choice.
module muldiv
  import rvmcu_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  md_op_e      op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        busy,
  output logic        done,
  output logic [31:0] y
);

  // ------------------------------------------------------------- multiply
  logic signed [32:0] ma, mb;
  logic signed [65:0] prod;
  logic [31:0]        mul_y;

  always_comb begin
    ma = (op == MD_MULHU) ? {1'b0, a} : {a[31], a};
    mb = (op == MD_MULH) ? {b[31], b} : {1'b0, b};
    prod = ma * mb;
    mul_y = (op == MD_MUL) ? prod[31:0] : prod[63:32];
  end

  // --------------------------------------------------------------- divide
  logic [31:0] quo, rem, dvsr;
  logic [5:0]  cnt;
  logic        neg_q, neg_r, is_rem, div0;
  logic [31:0] div_y;
  logic [32:0] trial;

  wire signed_op = (op == MD_DIV) || (op == MD_REM);

  assign trial = {rem[30:0], quo[31]} - {1'b0, dvsr};

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cnt    <= '0;
      quo    <= '0;
      rem    <= '0;
      dvsr   <= '0;
      neg_q  <= 1'b0;
      neg_r  <= 1'b0;
      is_rem <= 1'b0;
      div0   <= 1'b0;
    end else if (start && !busy) begin
      busy   <= 1'b1;
      done   <= 1'b0;
      cnt    <= 6'd32;
      quo    <= (signed_op && a[31]) ? -a : a;
      rem    <= '0;
      dvsr   <= (signed_op && b[31]) ? -b : b;
      neg_q  <= signed_op && (a[31] ^ b[31]) && (b != 0);
      neg_r  <= signed_op && a[31];
      is_rem <= (op == MD_REM) || (op == MD_REMU);
      div0   <= (b == 0);
    end else if (busy) begin
      // one restoring step: shift {rem,quo} left, subtract if it fits
      if (!trial[32]) begin
        rem <= trial[31:0];
        quo <= {quo[30:0], 1'b1};
      end else begin
        rem <= {rem[30:0], quo[31]};
        quo <= {quo[30:0], 1'b0};
      end
      cnt <= cnt - 6'd1;
      if (cnt == 6'd1) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end else begin
      done <= 1'b0;
    end
  end

  always_comb begin
    if (is_rem) div_y = neg_r ? -rem : rem;
    else        div_y = div0 ? 32'hFFFF_FFFF : (neg_q ? -quo : quo);
  end

  assign y = op[2] ? div_y : mul_y;

endmodule
