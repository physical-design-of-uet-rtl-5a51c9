// pipeline_top: the 3-stage RV32IMA + Zba/Zbb/Zbc/Zbs processor core.
//
// Stages, as the paper names them: Fetch, Decode/Execute and Writeback.
//  * Fetch holds the PC (pc_f) and presents it on the instruction port. The
//    memory returns the word one cycle later; its output register serves as
//    the Fetch/Decode pipeline register (imem_en low keeps it unchanged).
//  * Decode/Execute decodes, reads the register file, runs the ALU, the
//    multiplier/divider, the CSR unit and the load/store unit, resolves branches
//    and jumps, takes traps and interrupts, and issues the data-bus access.
//  * Writeback receives load data from the data bus (one cycle after the
//    request), extends it and writes the register file. The register file
//    writes through to same-cycle reads, so a dependent instruction in
//    Decode/Execute sees Writeback's result, load data included, with no stall.
// A taken branch, jump, trap, MRET or FENCE.I redirects Fetch and discards the
// one instruction already fetched (one bubble). Division holds Decode/Execute
// for 33 cycles and an AMO for one extra cycle; nothing else stalls. Interrupts
// are taken on the instruction in Decode/Execute when it has not started a
// multi-cycle operation; its PC goes to mepc. Machine mode only, no MMU, flat
// addresses: as in the paper. Stage contents, bypassing and the fixed-latency
// data bus are this design's own choices. Reset: asynchronous, active high, in
// its own if clause, the style the paper recommends for its synthesis flow.
module pipeline_top
  import rvmcu_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h8000_0000
) (
  input  logic        clk,
  input  logic        rst,
  // instruction port
  output logic [31:0] imem_addr,
  output logic        imem_en,
  input  logic [31:0] imem_rdata,
  // data port
  output dbus_req_t   dbus_req,
  input  dbus_rsp_t   dbus_rsp,
  // interrupts
  input  logic        irq_mext,
  input  logic        irq_mtimer,
  input  logic        irq_msoft
);

  // ------------------------------------------------------------------ state
  logic [31:0] pc_f, de_pc;
  logic        de_valid;
  logic        wb_valid, wb_load;
  logic [4:0]  wb_rd;
  logic [31:0] wb_result;
  logic [2:0]  wb_funct3;
  logic [1:0]  wb_off;

  // ------------------------------------------------------------ decode/exec
  logic [31:0] instr;
  dec_t        d;
  logic [31:0] rs1_v, rs2_v, op_a, op_b, alu_y, md_y, csr_rdata, wb_data;
  logic        md_busy, md_done, md_start, md_stall;
  logic        lsu_stall, lsu_mis, lsu_valid, csr_illegal;
  logic [31:0] lsu_result, wb_ldata;
  logic        irq_pending;
  logic [31:0] irq_cause, mtvec, mepc;
  logic        br_taken, jump, exc, take_irq, trap, stall, fire;
  logic [31:0] target, trap_cause, trap_tval, de_result;
  logic        is_mem, is_div, mid_op, amo_busy;

  assign instr = imem_rdata;

  decoder u_dec (.instr(instr), .d(d));

  regfile u_rf (
    .clk(clk), .rs1(instr[19:15]), .rs2(instr[24:20]), .rd1(rs1_v), .rd2(rs2_v),
    .we(wb_valid), .rd(wb_rd), .wd(wb_data)
  );

  assign op_a = d.a_zero ? 32'h0 : (d.a_pc ? de_pc : rs1_v);
  assign op_b = d.use_imm ? d.imm : rs2_v;

  alu u_alu (.op(d.alu_op), .a(op_a), .b(op_b), .y(alu_y));

  // multiply / divide
  assign is_div   = d.is_md && d.md_op[2];
  assign md_start = de_valid && is_div && !md_busy && !md_done && !take_irq;
  assign md_stall = de_valid && is_div && !md_done;

  muldiv u_md (
    .clk(clk), .rst(rst), .start(md_start), .op(d.md_op), .a(rs1_v), .b(rs2_v),
    .busy(md_busy), .done(md_done), .y(md_y)
  );

  // load / store / atomics
  assign is_mem    = d.is_load || d.is_store || (d.amo != AMO_NONE);
  assign lsu_valid = de_valid && is_mem && !take_irq && !d.illegal;

  lsu u_lsu (
    .clk(clk), .rst(rst),
    .valid(lsu_valid), .is_load(d.is_load), .is_store(d.is_store), .amo(d.amo),
    .funct3(instr[14:12]), .addr(alu_y), .wdata(rs2_v), .clear_resv(trap),
    .req(dbus_req), .stall(lsu_stall), .amo_busy(amo_busy), .misaligned(lsu_mis), .de_result(lsu_result),
    .wb_load(wb_load), .wb_funct3(wb_funct3), .wb_off(wb_off), .rsp(dbus_rsp),
    .wb_ldata(wb_ldata)
  );

  // branches and jumps
  always_comb begin
    unique case (instr[14:12])
      3'b000:  br_taken = (rs1_v == rs2_v);
      3'b001:  br_taken = (rs1_v != rs2_v);
      3'b100:  br_taken = ($signed(rs1_v) <  $signed(rs2_v));
      3'b101:  br_taken = ($signed(rs1_v) >= $signed(rs2_v));
      3'b110:  br_taken = (rs1_v <  rs2_v);
      default: br_taken = (rs1_v >= rs2_v);
    endcase
    br_taken = br_taken && d.is_branch;
    jump     = br_taken || d.is_jal || d.is_jalr;
    target   = d.is_jalr ? {alu_y[31:1], 1'b0} : de_pc + d.imm;
  end

  // traps: an interrupt is taken only before a multi-cycle operation starts
  assign mid_op   = md_busy || md_done || amo_busy;
  assign take_irq = de_valid && irq_pending && !mid_op;

  csr_machine u_csr (
    .clk(clk), .rst(rst),
    .csr_en(de_valid && d.is_csr && !take_irq), .csr_addr(instr[31:20]), .csr_cmd(d.csr_cmd),
    .csr_wr(d.csr_cmd == 2'b01 || instr[19:15] != 5'd0),
    .csr_wdata(d.csr_imm ? d.imm : rs1_v), .csr_rdata(csr_rdata), .csr_illegal(csr_illegal),
    .trap(trap), .trap_cause(trap_cause), .trap_pc(de_pc), .trap_tval(trap_tval),
    .mret(fire && d.mret), .retire(fire),
    .irq_mext(irq_mext), .irq_mtimer(irq_mtimer), .irq_msoft(irq_msoft),
    .irq_pending(irq_pending), .irq_cause(irq_cause), .mtvec(mtvec), .mepc(mepc)
  );

  always_comb begin
    exc        = 1'b0;
    trap_cause = '0;
    trap_tval  = '0;
    if (d.illegal || csr_illegal) begin
      exc = 1'b1; trap_cause = EXC_ILLEGAL; trap_tval = instr;
    end else if (d.ecall) begin
      exc = 1'b1; trap_cause = EXC_ECALL_M;
    end else if (d.ebreak) begin
      exc = 1'b1; trap_cause = EXC_BREAKPOINT; trap_tval = de_pc;
    end else if (is_mem && lsu_mis) begin
      exc = 1'b1; trap_tval = alu_y;
      trap_cause = (d.is_load || d.amo == AMO_LR) ? EXC_LOAD_MISALIGNED : EXC_STORE_MISALIGNED;
    end else if (jump && target[1]) begin
      exc = 1'b1; trap_cause = EXC_INSTR_MISALIGNED; trap_tval = target;
    end
    exc = exc && de_valid && !take_irq;
    if (take_irq) trap_cause = irq_cause;
  end

  assign trap  = take_irq || exc;
  assign stall = !trap && (md_stall || lsu_stall);
  assign fire  = de_valid && !trap && !stall;     // instruction completes

  // result leaving Decode/Execute
  always_comb begin
    if (d.is_jal || d.is_jalr)      de_result = de_pc + 32'd4;
    else if (d.is_csr)              de_result = csr_rdata;
    else if (d.is_md)               de_result = md_y;
    else if (d.amo != AMO_NONE)     de_result = lsu_result;
    else                            de_result = alu_y;
  end

  // ------------------------------------------------------------ writeback
  assign wb_data = wb_load ? wb_ldata : wb_result;

  // ----------------------------------------------------------- fetch / PCs
  assign imem_addr = pc_f;
  assign imem_en   = !stall;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      pc_f      <= RESET_PC;
      de_pc     <= RESET_PC;
      de_valid  <= 1'b0;
      wb_valid  <= 1'b0;
      wb_load   <= 1'b0;
      wb_rd     <= '0;
      wb_result <= '0;
      wb_funct3 <= '0;
      wb_off    <= '0;
    end else begin
      // Writeback register
      wb_valid  <= fire && d.rf_we && (instr[11:7] != 5'd0);
      wb_load   <= fire && (d.is_load || d.amo == AMO_LR);
      wb_rd     <= instr[11:7];
      wb_result <= de_result;
      wb_funct3 <= instr[14:12];
      wb_off    <= alu_y[1:0];
      // Fetch and Decode/Execute
      if (trap) begin
        pc_f     <= mtvec;
        de_valid <= 1'b0;
      end else if (!stall) begin
        if (fire && d.mret) begin
          pc_f     <= mepc;
          de_valid <= 1'b0;
        end else if (fire && jump) begin
          pc_f     <= target;
          de_valid <= 1'b0;
        end else if (fire && d.fence_i) begin
          pc_f     <= de_pc + 32'd4;
          de_valid <= 1'b0;
        end else begin
          pc_f     <= pc_f + 32'd4;
          de_pc    <= pc_f;
          de_valid <= 1'b1;
        end
      end
    end
  end

endmodule
