// tb_lsu: load/store unit request building, load extension and atomics.
//
// Checks the bus request of stores of each size at each legal offset (strobes
// and lane replication), misalignment detection, the extension of loaded bytes
// and half-words for every load type and offset, the two-phase AMO (read with
// stall, then write of the combined value, old value as result) for all nine
// AMO kinds against a reference written here, and LR/SC: success after LR,
// failure without a reservation, and failure after an intervening store to
// the reserved word.
`timescale 1ns/1ps
module tb_lsu;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1;
  logic valid = 0, is_load = 0, is_store = 0, clear_resv = 0;
  amo_op_e amo = AMO_NONE;
  logic [2:0] funct3 = 0, wb_funct3 = 0;
  logic [31:0] addr = 0, wdata = 0, de_result, wb_ldata;
  dbus_req_t req;
  dbus_rsp_t rsp = '0;
  logic stall, amo_busy, misaligned, wb_load = 0;
  logic [1:0] wb_off = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lsu dut (.*);

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  function automatic logic [31:0] amo_ref(amo_op_e o, logic [31:0] m, logic [31:0] r);
    case (o)
      AMO_SWAP: return r;
      AMO_ADD:  return m + r;
      AMO_XOR:  return m ^ r;
      AMO_AND:  return m & r;
      AMO_OR:   return m | r;
      AMO_MIN:  return (int'(m) < int'(r)) ? m : r;
      AMO_MAX:  return (int'(m) > int'(r)) ? m : r;
      AMO_MINU: return (m < r) ? m : r;
      AMO_MAXU: return (m > r) ? m : r;
      default:  return 'x;
    endcase
  endfunction

  initial begin
    logic [31:0] m, r, w;
    repeat (2) @(negedge clk);
    rst = 0;
    // ---------------- stores
    w = 32'hA1B2C3D4;
    for (int sz = 0; sz < 3; sz++)
      for (int off = 0; off < 4; off++) begin
        valid = 1; is_store = 1; funct3 = 3'(sz); addr = 32'h8000_0100 + off; wdata = w;
        #1;
        if ((sz == 1 && off[0]) || (sz == 2 && off != 0)) begin
          check("store misaligned", 32'(misaligned), 1);
          check("no request when misaligned", 32'(req.valid), 0);
        end else begin
          check("store aligned", 32'(misaligned), 0);
          check("store valid/we", {req.valid, req.we}, 2'b11);
          check("store word address", req.addr, 32'h8000_0100);
          check("store strobes", 32'(req.strb), 32'((sz == 0 ? 4'b0001 : sz == 1 ? 4'b0011 : 4'b1111) << off));
          for (int b = 0; b < 4; b++)
            if (req.strb[b]) check("store lane", 32'(req.wdata[8*b +: 8]), 32'(w[8*(b - off) +: 8]));
        end
      end
    is_store = 0;
    // ---------------- load request and extension
    is_load = 1; funct3 = 3'b000; addr = 32'h8000_0203; #1;
    check("load request", {req.valid, req.we}, 2'b10);
    valid = 0; is_load = 0;
    rsp.rdata = 32'h80F1_7F02;
    for (int off = 0; off < 4; off++) begin
      logic [7:0] by; logic [15:0] hw;
      by = rsp.rdata[8*off +: 8];
      hw = rsp.rdata[8*(off & 2) +: 16];
      wb_load = 1; wb_off = 2'(off);
      wb_funct3 = 3'b000; #1 check("lb",  wb_ldata, {{24{by[7]}}, by});
      wb_funct3 = 3'b100; #1 check("lbu", wb_ldata, {24'h0, by});
      if (off[0] == 0) begin
        wb_funct3 = 3'b001; #1 check("lh",  wb_ldata, {{16{hw[15]}}, hw});
        wb_funct3 = 3'b101; #1 check("lhu", wb_ldata, {16'h0, hw});
      end
      if (off == 0) begin
        wb_funct3 = 3'b010; #1 check("lw", wb_ldata, rsp.rdata);
      end
    end
    wb_load = 0;
    // ---------------- AMOs
    for (int o = AMO_SWAP; o <= AMO_MAXU; o++) begin
      m = $urandom; r = $urandom;
      if (o == AMO_MIN) begin m = 32'hffff_fff0; r = 32'h5; end
      @(negedge clk);
      valid = 1; amo = amo_op_e'(o); funct3 = 3'b010; addr = 32'h8000_0300; wdata = r;
      #1;
      check("amo read phase stall", 32'(stall), 1);
      check("amo read request", {req.valid, req.we}, 2'b10);
      @(negedge clk);
      rsp.rdata = m; #1;
      check("amo busy", 32'(amo_busy), 1);
      check("amo write phase no stall", 32'(stall), 0);
      check("amo write request", {req.valid, req.we, req.strb}, 6'b11_1111);
      check({"amo new value ", amo.name()}, req.wdata, amo_ref(amo, m, r));
      check("amo result = old", de_result, m);
      @(negedge clk);
      valid = 0; amo = AMO_NONE;
      #1 check("amo done", 32'(amo_busy), 0);
    end
    // ---------------- LR / SC
    @(negedge clk);
    valid = 1; amo = AMO_SC; addr = 32'h8000_0400; wdata = 32'h77; #1;
    check("sc without lr fails", de_result, 1);
    check("failed sc does not write", 32'(req.valid), 0);
    @(negedge clk); amo = AMO_LR; #1 check("lr reads", {req.valid, req.we}, 2'b10);
    @(negedge clk); amo = AMO_SC; #1;
    check("sc after lr succeeds", de_result, 0);
    check("sc writes", {req.valid, req.we}, 2'b11);
    @(negedge clk); #1 check("second sc fails", de_result, 1);
    @(negedge clk); amo = AMO_LR;
    @(negedge clk); amo = AMO_NONE; is_store = 1; funct3 = 3'b000; addr = 32'h8000_0401;
    @(negedge clk); is_store = 0; amo = AMO_SC; funct3 = 3'b010; addr = 32'h8000_0400; #1;
    check("sc after store to reserved word fails", de_result, 1);
    @(negedge clk); amo = AMO_LR;
    @(negedge clk); valid = 0; clear_resv = 1;
    @(negedge clk); clear_resv = 0; valid = 1; amo = AMO_SC; #1;
    check("sc after trap fails", de_result, 1);
    valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
