// mem_top: the microcontroller's memory, four byte-addressable banks.
//
// The paper's memory system is four block memories, each with its own read and
// write ports. Here each bank (mem_bank) is a contiguous BANK_WORDS-word region
// selected by the two address bits just above the in-bank word index, so with
// the default 256 words per bank bank 0 holds 0x000-0x3FF, bank 1 0x400-0x7FF,
// and so on (addresses above the 4 KiB wrap). Software can therefore keep code
// and data in separate banks. Every bank has an instruction read port and a
// data read/write port, so a fetch and a data access never conflict, even in
// the same bank. Timing: both ports answer one cycle after the request; the
// data port's rsp.valid marks that cycle for reads and writes alike. The bank
// size and the address split are this design's own choices.
module mem_top
  import rvmcu_pkg::*;
#(
  parameter int unsigned BANKS      = 4,
  parameter int unsigned BANK_WORDS = 256,
  localparam int unsigned AW = $clog2(BANK_WORDS),
  localparam int unsigned BW = $clog2(BANKS)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        imem_en,
  input  logic [31:0] imem_addr,
  output logic [31:0] imem_rdata,
  input  dbus_req_t   req,
  output dbus_rsp_t   rsp
);

  logic [BW-1:0] i_bank, d_bank, i_bank_q, d_bank_q;
  logic [AW-1:0] i_idx, d_idx;
  logic [31:0]   i_data [BANKS];
  logic [31:0]   d_data [BANKS];
  logic          d_valid_q;

  assign i_idx  = imem_addr[2 +: AW];
  assign i_bank = imem_addr[2 + AW +: BW];
  assign d_idx  = req.addr[2 +: AW];
  assign d_bank = req.addr[2 + AW +: BW];

  for (genvar g = 0; g < BANKS; g++) begin : g_bank
    mem_bank #(.WORDS(BANK_WORDS)) u_bank (
      .clk(clk), .rst(rst),
      .i_en(imem_en && i_bank == BW'(g)), .i_addr(i_idx), .i_rdata(i_data[g]),
      .d_en(req.valid && d_bank == BW'(g)), .d_we(req.we), .d_strb(req.strb),
      .d_addr(d_idx), .d_wdata(req.wdata), .d_rdata(d_data[g])
    );
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      i_bank_q  <= '0;
      d_bank_q  <= '0;
      d_valid_q <= 1'b0;
    end else begin
      if (imem_en)   i_bank_q <= i_bank;
      if (req.valid) d_bank_q <= d_bank;
      d_valid_q <= req.valid;
    end
  end

  assign imem_rdata = i_data[i_bank_q];
  assign rsp.valid  = d_valid_q;
  assign rsp.rdata  = d_data[d_bank_q];

endmodule
