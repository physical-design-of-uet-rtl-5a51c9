// mem_bank: one of the four block memories of the microcontroller.
//
// A WORDS x 32-bit array with byte write strobes and two ports of its own: an
// instruction read port (i_*) and a data read/write port (d_*). Both reads are
// synchronous: the word addressed while the port is enabled appears on the
// output in the next cycle and stays there while the port is idle. A data
// write updates only the strobed bytes; a read of the word being written
// returns the old contents (read-before-write). Written as a register array
// because the chip carries no SRAM macro; the two-port-per-bank arrangement is
// the paper's, the array size is this design's own choice.
module mem_bank #(
  parameter int unsigned WORDS = 256,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          i_en,
  input  logic [AW-1:0] i_addr,
  output logic [31:0]   i_rdata,
  input  logic          d_en,
  input  logic          d_we,
  input  logic [3:0]    d_strb,
  input  logic [AW-1:0] d_addr,
  input  logic [31:0]   d_wdata,
  output logic [31:0]   d_rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (d_en && d_we) begin
      for (int b = 0; b < 4; b++)
        if (d_strb[b]) mem[d_addr][8*b +: 8] <= d_wdata[8*b +: 8];
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      i_rdata <= '0;
      d_rdata <= '0;
    end else begin
      if (i_en)          i_rdata <= mem[i_addr];
      if (d_en && !d_we) d_rdata <= mem[d_addr];
    end
  end

endmodule
