// lsu: load/store and atomic-memory unit of the core.
//
// Decode/Execute side: for a load, store, LR.W, SC.W or AMO the unit builds the
// data-bus request (word address, byte strobes, store data replicated into the
// addressed lanes) and flags a misaligned address so the core can trap instead.
// Loads and LR.W issue a read; their data comes back one cycle later, while the
// instruction is in Writeback, where wb_ldata selects and sign/zero-extends the
// addressed byte or half-word. An AMO takes two cycles in Decode/Execute: the
// first issues the read and raises stall; in the second the old value (bus read
// data) is combined with rs2, the new value is written, and the old value is
// the instruction's result (de_result). SC.W writes only when the reservation
// set by LR.W covers its address and yields 0 on success, 1 on failure. The
// reservation is cleared by SC.W, by clear_resv (traps) and by any store that
// hits the reserved word. The A extension is the paper's; the two-phase AMO and
// this interface are this design's own choices.
module lsu
  import rvmcu_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // Decode/Execute side
  input  logic        valid,       // memory instruction may act this cycle
  input  logic        is_load,
  input  logic        is_store,
  input  amo_op_e     amo,         // AMO_NONE for plain loads/stores
  input  logic [2:0]  funct3,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  input  logic        clear_resv,
  output dbus_req_t   req,
  output logic        stall,       // AMO read phase: hold the instruction
  output logic        amo_busy,    // AMO write phase in progress
  output logic        misaligned,
  output logic [31:0] de_result,   // result of AMO / SC.W
  // Writeback side
  input  logic        wb_load,
  input  logic [2:0]  wb_funct3,
  input  logic [1:0]  wb_off,
  input  dbus_rsp_t   rsp,
  output logic [31:0] wb_ldata
);

  logic        amo_phase;          // 1 = AMO write phase
  logic        resv_valid;
  logic [29:0] resv_addr;
  logic [31:0] old, amo_new;
  logic [3:0]  mask;
  logic        is_amo_rmw, sc_ok;

  assign old        = rsp.rdata;
  assign amo_busy   = amo_phase;
  assign is_amo_rmw = (amo != AMO_NONE) && (amo != AMO_LR) && (amo != AMO_SC);
  assign sc_ok      = resv_valid && (resv_addr == addr[31:2]);

  always_comb begin
    unique case (funct3[1:0])
      2'b00:   mask = 4'b0001;
      2'b01:   mask = 4'b0011;
      default: mask = 4'b1111;
    endcase
    unique case (funct3[1:0])
      2'b00:   misaligned = 1'b0;
      2'b01:   misaligned = addr[0];
      default: misaligned = addr[1:0] != 2'b00;
    endcase
  end

  always_comb begin
    unique case (amo)
      AMO_SWAP: amo_new = wdata;
      AMO_ADD:  amo_new = old + wdata;
      AMO_XOR:  amo_new = old ^ wdata;
      AMO_AND:  amo_new = old & wdata;
      AMO_OR:   amo_new = old | wdata;
      AMO_MIN:  amo_new = ($signed(old) < $signed(wdata)) ? old : wdata;
      AMO_MAX:  amo_new = ($signed(old) < $signed(wdata)) ? wdata : old;
      AMO_MINU: amo_new = (old < wdata) ? old : wdata;
      AMO_MAXU: amo_new = (old < wdata) ? wdata : old;
      default:  amo_new = wdata;
    endcase
  end

  always_comb begin
    req       = DBUS_REQ_IDLE;
    req.addr  = {addr[31:2], 2'b00};
    stall     = 1'b0;
    de_result = old;
    if (valid && !misaligned) begin
      if (is_amo_rmw) begin
        req.valid = 1'b1;
        if (!amo_phase) begin
          stall = 1'b1;                     // read phase
        end else begin
          req.we    = 1'b1;                 // write phase
          req.strb  = 4'hF;
          req.wdata = amo_new;
        end
      end else if (amo == AMO_SC) begin
        de_result = sc_ok ? 32'h0 : 32'h1;
        req.valid = sc_ok;
        req.we    = 1'b1;
        req.strb  = 4'hF;
        req.wdata = wdata;
      end else if (is_load || amo == AMO_LR) begin
        req.valid = 1'b1;
      end else if (is_store) begin
        req.valid = 1'b1;
        req.we    = 1'b1;
        req.strb  = mask << addr[1:0];
        unique case (funct3[1:0])
          2'b00:   req.wdata = {4{wdata[7:0]}};
          2'b01:   req.wdata = {2{wdata[15:0]}};
          default: req.wdata = wdata;
        endcase
      end
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      amo_phase  <= 1'b0;
      resv_valid <= 1'b0;
      resv_addr  <= '0;
    end else begin
      if (valid && !misaligned && is_amo_rmw) amo_phase <= !amo_phase;
      else                                    amo_phase <= 1'b0;
      if (clear_resv) begin
        resv_valid <= 1'b0;
      end else if (valid && !misaligned) begin
        if (amo == AMO_LR) begin
          resv_valid <= 1'b1;
          resv_addr  <= addr[31:2];
        end else if (amo == AMO_SC) begin
          resv_valid <= 1'b0;
        end else if (req.valid && req.we && addr[31:2] == resv_addr) begin
          resv_valid <= 1'b0;
        end
      end
    end
  end

  // Writeback: pick and extend the loaded byte / half-word.
  logic [31:0] sh;
  assign sh = rsp.rdata >> {wb_off, 3'b000};
  always_comb begin
    unique case (wb_funct3)
      3'b000:  wb_ldata = {{24{sh[7]}}, sh[7:0]};
      3'b001:  wb_ldata = {{16{sh[15]}}, sh[15:0]};
      3'b100:  wb_ldata = {24'h0, sh[7:0]};
      3'b101:  wb_ldata = {16'h0, sh[15:0]};
      default: wb_ldata = rsp.rdata;
    endcase
    if (!wb_load) wb_ldata = '0;
  end

endmodule
