// decoder: RV32IMA + Zba/Zbb/Zbc/Zbs + Zicsr instruction decoder.
//
// Purely combinational; used in the Decode/Execute stage. It turns a 32-bit
// instruction word into a dec_t control bundle: ALU operation and operand
// selection, immediate, branch/jump kind, load/store/atomic kind, multiply or
// divide operation, CSR command, and the system instructions ECALL, EBREAK,
// MRET and FENCE.I. FENCE and WFI decode as no-operations. Any encoding outside
// the supported set sets illegal. Encodings follow the RISC-V specifications;
// the supported extensions are the ones the paper lists.
module decoder
  import rvmcu_pkg::*;
(
  input  logic [31:0] instr,
  output dec_t        d
);

  logic [6:0] opc, f7;
  logic [2:0] f3;
  logic [4:0] rs2f, f5;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opc  = instr[6:0];
  assign f3   = instr[14:12];
  assign f7   = instr[31:25];
  assign rs2f = instr[24:20];
  assign f5   = instr[31:27];

  assign imm_i = {{20{instr[31]}}, instr[31:20]};
  assign imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
  assign imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
  assign imm_u = {instr[31:12], 12'h0};
  assign imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

  always_comb begin
    d = '0;
    d.alu_op = ALU_ADD;
    d.amo    = AMO_NONE;
    d.md_op  = md_op_e'(f3);
    d.imm    = imm_i;
    unique case (opc)
      OPC_LUI:   begin d.rf_we = 1'b1; d.use_imm = 1'b1; d.a_zero = 1'b1; d.imm = imm_u; end
      OPC_AUIPC: begin d.rf_we = 1'b1; d.use_imm = 1'b1; d.a_pc = 1'b1;   d.imm = imm_u; end
      OPC_JAL:   begin d.rf_we = 1'b1; d.is_jal = 1'b1; d.imm = imm_j; end
      OPC_JALR:  begin
        d.rf_we = 1'b1; d.is_jalr = 1'b1; d.use_imm = 1'b1;
        d.illegal = (f3 != 3'b000);
      end
      OPC_BRANCH: begin
        d.is_branch = 1'b1; d.imm = imm_b;
        d.illegal = (f3 == 3'b010) || (f3 == 3'b011);
      end
      OPC_LOAD: begin
        d.rf_we = 1'b1; d.is_load = 1'b1; d.use_imm = 1'b1;
        d.illegal = (f3 == 3'b011) || (f3 == 3'b110) || (f3 == 3'b111);
      end
      OPC_STORE: begin
        d.is_store = 1'b1; d.use_imm = 1'b1; d.imm = imm_s;
        d.illegal = (f3 > 3'b010);
      end
      OPC_OPIMM: begin
        d.rf_we = 1'b1; d.use_imm = 1'b1;
        unique case (f3)
          3'b000: d.alu_op = ALU_ADD;
          3'b010: d.alu_op = ALU_SLT;
          3'b011: d.alu_op = ALU_SLTU;
          3'b100: d.alu_op = ALU_XOR;
          3'b110: d.alu_op = ALU_OR;
          3'b111: d.alu_op = ALU_AND;
          3'b001: begin
            unique case (f7)
              7'b0000000: d.alu_op = ALU_SLL;
              7'b0100100: d.alu_op = ALU_BCLR;
              7'b0110100: d.alu_op = ALU_BINV;
              7'b0010100: d.alu_op = ALU_BSET;
              7'b0110000: begin
                unique case (rs2f)
                  5'b00000: d.alu_op = ALU_CLZ;
                  5'b00001: d.alu_op = ALU_CTZ;
                  5'b00010: d.alu_op = ALU_CPOP;
                  5'b00100: d.alu_op = ALU_SEXTB;
                  5'b00101: d.alu_op = ALU_SEXTH;
                  default:  d.illegal = 1'b1;
                endcase
              end
              default: d.illegal = 1'b1;
            endcase
          end
          3'b101: begin
            unique case (f7)
              7'b0000000: d.alu_op = ALU_SRL;
              7'b0100000: d.alu_op = ALU_SRA;
              7'b0110000: d.alu_op = ALU_ROR;
              7'b0100100: d.alu_op = ALU_BEXT;
              7'b0010100: if (rs2f == 5'b00111) d.alu_op = ALU_ORCB; else d.illegal = 1'b1;
              7'b0110100: if (rs2f == 5'b11000) d.alu_op = ALU_REV8; else d.illegal = 1'b1;
              default:    d.illegal = 1'b1;
            endcase
          end
          default: ;
        endcase
      end
      OPC_OP: begin
        d.rf_we = 1'b1;
        unique case (f7)
          7'b0000000: begin
            unique case (f3)
              3'b000: d.alu_op = ALU_ADD;
              3'b001: d.alu_op = ALU_SLL;
              3'b010: d.alu_op = ALU_SLT;
              3'b011: d.alu_op = ALU_SLTU;
              3'b100: d.alu_op = ALU_XOR;
              3'b101: d.alu_op = ALU_SRL;
              3'b110: d.alu_op = ALU_OR;
              default: d.alu_op = ALU_AND;
            endcase
          end
          7'b0100000: begin
            unique case (f3)
              3'b000: d.alu_op = ALU_SUB;
              3'b101: d.alu_op = ALU_SRA;
              3'b100: d.alu_op = ALU_XNOR;
              3'b110: d.alu_op = ALU_ORN;
              3'b111: d.alu_op = ALU_ANDN;
              default: d.illegal = 1'b1;
            endcase
          end
          7'b0000001: d.is_md = 1'b1;
          7'b0010000: begin
            unique case (f3)
              3'b010: d.alu_op = ALU_SH1ADD;
              3'b100: d.alu_op = ALU_SH2ADD;
              3'b110: d.alu_op = ALU_SH3ADD;
              default: d.illegal = 1'b1;
            endcase
          end
          7'b0000101: begin
            unique case (f3)
              3'b001: d.alu_op = ALU_CLMUL;
              3'b010: d.alu_op = ALU_CLMULR;
              3'b011: d.alu_op = ALU_CLMULH;
              3'b100: d.alu_op = ALU_MIN;
              3'b101: d.alu_op = ALU_MINU;
              3'b110: d.alu_op = ALU_MAX;
              3'b111: d.alu_op = ALU_MAXU;
              default: d.illegal = 1'b1;
            endcase
          end
          7'b0000100: if (f3 == 3'b100 && rs2f == 5'd0) d.alu_op = ALU_ZEXTH; else d.illegal = 1'b1;
          7'b0110000: begin
            if (f3 == 3'b001)      d.alu_op = ALU_ROL;
            else if (f3 == 3'b101) d.alu_op = ALU_ROR;
            else                   d.illegal = 1'b1;
          end
          7'b0100100: begin
            if (f3 == 3'b001)      d.alu_op = ALU_BCLR;
            else if (f3 == 3'b101) d.alu_op = ALU_BEXT;
            else                   d.illegal = 1'b1;
          end
          7'b0110100: if (f3 == 3'b001) d.alu_op = ALU_BINV; else d.illegal = 1'b1;
          7'b0010100: if (f3 == 3'b001) d.alu_op = ALU_BSET; else d.illegal = 1'b1;
          default: d.illegal = 1'b1;
        endcase
      end
      OPC_AMO: begin
        d.rf_we = 1'b1; d.use_imm = 1'b1; d.imm = '0;
        d.illegal = (f3 != 3'b010);
        unique case (f5)
          5'b00010: begin d.amo = AMO_LR; if (rs2f != 5'd0) d.illegal = 1'b1; end
          5'b00011: d.amo = AMO_SC;
          5'b00001: d.amo = AMO_SWAP;
          5'b00000: d.amo = AMO_ADD;
          5'b00100: d.amo = AMO_XOR;
          5'b01100: d.amo = AMO_AND;
          5'b01000: d.amo = AMO_OR;
          5'b10000: d.amo = AMO_MIN;
          5'b10100: d.amo = AMO_MAX;
          5'b11000: d.amo = AMO_MINU;
          5'b11100: d.amo = AMO_MAXU;
          default:  d.illegal = 1'b1;
        endcase
      end
      OPC_FENCE: begin
        if (f3 == 3'b001)      d.fence_i = 1'b1;
        else if (f3 != 3'b000) d.illegal = 1'b1;
      end
      OPC_SYSTEM: begin
        d.imm = {27'h0, instr[19:15]};
        if (f3 == 3'b000) begin
          unique case (instr)
            32'h0000_0073: d.ecall  = 1'b1;
            32'h0010_0073: d.ebreak = 1'b1;
            32'h3020_0073: d.mret   = 1'b1;
            32'h1050_0073: ;                 // wfi: no-op
            default:       d.illegal = 1'b1;
          endcase
        end else if (f3 == 3'b100) begin
          d.illegal = 1'b1;
        end else begin
          d.is_csr  = 1'b1;
          d.rf_we   = 1'b1;
          d.csr_cmd = f3[1:0];
          d.csr_imm = f3[2];
        end
      end
      default: d.illegal = 1'b1;
    endcase
    if (d.illegal) begin
      d.rf_we = 1'b0;
      d.amo   = AMO_NONE;
      d.is_md = 1'b0;
    end
  end

endmodule
