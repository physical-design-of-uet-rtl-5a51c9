// regfile: the 32 x 32-bit integer register file of the core.
//
// Two asynchronous read ports feed operands to the Decode/Execute stage; one
// write port, driven by the Writeback stage, updates a register on the rising
// clock edge. Register x0 always reads zero and ignores writes. A read of the
// register being written in the same cycle returns the new value (write-through),
// so an instruction in Decode/Execute sees the result leaving Writeback without
// a separate bypass path. The paper only implies this block through RV32I; all
// details here are this design's own choice. No reset: software initialises
// registers before use, as on most RISC-V cores.
module regfile (
  input  logic        clk,
  input  logic [4:0]  rs1,
  input  logic [4:0]  rs2,
  output logic [31:0] rd1,
  output logic [31:0] rd2,
  input  logic        we,
  input  logic [4:0]  rd,
  input  logic [31:0] wd
);

  logic [31:0] regs [1:31];

  always_ff @(posedge clk) begin
    if (we && rd != 5'd0) regs[rd] <= wd;
  end

  always_comb begin
    if (rs1 == 5'd0)                 rd1 = '0;
    else if (we && rd == rs1)        rd1 = wd;
    else                             rd1 = regs[rs1];
    if (rs2 == 5'd0)                 rd2 = '0;
    else if (we && rd == rs2)        rd2 = wd;
    else                             rd2 = regs[rs2];
  end

endmodule
