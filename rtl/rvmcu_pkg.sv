// rvmcu_pkg: types and constants shared by the RV32 microcontroller.
//
// Holds the data-bus request/response structs used between the core, the
// Dbus2peri interconnect and every slave, the memory map, the ALU and
// multiply/divide operation codes, the RV32 opcodes and the machine-mode CSR
// addresses. The data bus is a fixed-latency bus: a request is valid for one
// cycle and the addressed slave returns read data exactly one cycle later
// (rsp.valid high in that cycle). Bus widths, the memory map and the bus
// protocol are this design's own choices; the instruction set follows the
// RISC-V RV32IMA + Zba/Zbb/Zbc/Zbs specifications.
package rvmcu_pkg;

  // ---------------------------------------------------------------- data bus
  typedef struct packed {
    logic        valid;   // request in this cycle
    logic        we;      // 1 = write
    logic [3:0]  strb;    // byte strobes for writes
    logic [31:0] addr;    // byte address (word aligned for the slave)
    logic [31:0] wdata;
  } dbus_req_t;

  typedef struct packed {
    logic        valid;   // response to the request of the previous cycle
    logic [31:0] rdata;
  } dbus_rsp_t;

  localparam dbus_req_t DBUS_REQ_IDLE = '{valid: 1'b0, we: 1'b0, strb: 4'h0, addr: 32'h0, wdata: 32'h0};
  // Merge the strobed bytes of a bus write into a register's old value.
  function automatic logic [31:0] apply_strb(logic [31:0] old, logic [31:0] wdata, logic [3:0] strb);
    for (int b = 0; b < 4; b++)
      if (strb[b]) old[8*b +: 8] = wdata[8*b +: 8];
    return old;
  endfunction

  localparam dbus_rsp_t DBUS_RSP_IDLE = '{valid: 1'b0, rdata: 32'h0};

  // -------------------------------------------------------------- memory map
  localparam int unsigned N_SLAVES = 6;
  typedef enum logic [2:0] {
    SL_MEM   = 3'd0,
    SL_CLINT = 3'd1,
    SL_PLIC  = 3'd2,
    SL_UART  = 3'd3,
    SL_SPI   = 3'd4,
    SL_GPIO  = 3'd5,
    SL_NONE  = 3'd7
  } slave_e;

  localparam logic [31:0] MEM_BASE   = 32'h8000_0000;  // 0x8xxx_xxxx
  localparam logic [31:0] CLINT_BASE = 32'h0200_0000;  // 0x020x_xxxx (64 KiB)
  localparam logic [31:0] PLIC_BASE  = 32'h0C00_0000;  // 0x0Cxx_xxxx (4 MiB)
  localparam logic [31:0] UART_BASE  = 32'h9000_0000;  // 4 KiB each
  localparam logic [31:0] SPI_BASE   = 32'h9000_1000;
  localparam logic [31:0] GPIO_BASE  = 32'h9000_2000;

  // ------------------------------------------------------------------ opcodes
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_FENCE  = 7'b0001111;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;
  localparam logic [6:0] OPC_AMO    = 7'b0101111;

  // ------------------------------------------------------------------- ALU ops
  typedef enum logic [5:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_PASSB,
    // Zba
    ALU_SH1ADD, ALU_SH2ADD, ALU_SH3ADD,
    // Zbb
    ALU_ANDN, ALU_ORN, ALU_XNOR, ALU_CLZ, ALU_CTZ, ALU_CPOP, ALU_MAX, ALU_MAXU,
    ALU_MIN, ALU_MINU, ALU_SEXTB, ALU_SEXTH, ALU_ZEXTH, ALU_ROL, ALU_ROR,
    ALU_ORCB, ALU_REV8,
    // Zbc
    ALU_CLMUL, ALU_CLMULH, ALU_CLMULR,
    // Zbs
    ALU_BCLR, ALU_BEXT, ALU_BINV, ALU_BSET
  } alu_op_e;

  // ------------------------------------------------------- multiply / divide
  typedef enum logic [2:0] {
    MD_MUL = 3'd0, MD_MULH = 3'd1, MD_MULHSU = 3'd2, MD_MULHU = 3'd3,
    MD_DIV = 3'd4, MD_DIVU = 3'd5, MD_REM = 3'd6, MD_REMU = 3'd7
  } md_op_e;

  // -------------------------------------------------------- load/store/atomic
  typedef enum logic [3:0] {
    AMO_NONE, AMO_LR, AMO_SC, AMO_SWAP, AMO_ADD, AMO_XOR, AMO_AND, AMO_OR,
    AMO_MIN, AMO_MAX, AMO_MINU, AMO_MAXU
  } amo_op_e;

  // ------------------------------------------------------------ CSR addresses
  localparam logic [11:0] CSR_MSTATUS   = 12'h300;
  localparam logic [11:0] CSR_MISA      = 12'h301;
  localparam logic [11:0] CSR_MIE       = 12'h304;
  localparam logic [11:0] CSR_MTVEC     = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH  = 12'h340;
  localparam logic [11:0] CSR_MEPC      = 12'h341;
  localparam logic [11:0] CSR_MCAUSE    = 12'h342;
  localparam logic [11:0] CSR_MTVAL     = 12'h343;
  localparam logic [11:0] CSR_MIP       = 12'h344;
  localparam logic [11:0] CSR_MCYCLE    = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET  = 12'hB02;
  localparam logic [11:0] CSR_MCYCLEH   = 12'hB80;
  localparam logic [11:0] CSR_MINSTRETH = 12'hB82;
  localparam logic [11:0] CSR_CYCLE     = 12'hC00;
  localparam logic [11:0] CSR_INSTRET   = 12'hC02;
  localparam logic [11:0] CSR_CYCLEH    = 12'hC80;
  localparam logic [11:0] CSR_INSTRETH  = 12'hC82;
  localparam logic [11:0] CSR_MVENDORID = 12'hF11;
  localparam logic [11:0] CSR_MARCHID   = 12'hF12;
  localparam logic [11:0] CSR_MIMPID    = 12'hF13;
  localparam logic [11:0] CSR_MHARTID   = 12'hF14;

  // Exception causes (mcause with bit 31 clear)
  localparam logic [31:0] EXC_INSTR_MISALIGNED = 32'd0;
  localparam logic [31:0] EXC_ILLEGAL          = 32'd2;
  localparam logic [31:0] EXC_BREAKPOINT       = 32'd3;
  localparam logic [31:0] EXC_LOAD_MISALIGNED  = 32'd4;
  localparam logic [31:0] EXC_STORE_MISALIGNED = 32'd6;
  localparam logic [31:0] EXC_ECALL_M          = 32'd11;
  // Interrupt causes (mcause bit 31 set)
  localparam logic [31:0] IRQ_MSOFT  = 32'h8000_0003;
  localparam logic [31:0] IRQ_MTIMER = 32'h8000_0007;
  localparam logic [31:0] IRQ_MEXT   = 32'h8000_000B;

  // ------------------------------------------------- decoded instruction
  typedef struct packed {
    logic        illegal;
    logic        rf_we;      // writes rd
    logic        use_imm;    // ALU operand b is the immediate
    logic        a_pc;       // ALU operand a is the PC (AUIPC)
    logic        a_zero;     // ALU operand a is zero (LUI)
    alu_op_e     alu_op;
    logic        is_branch;
    logic        is_jal;
    logic        is_jalr;
    logic        is_load;
    logic        is_store;
    amo_op_e     amo;
    logic        is_md;
    md_op_e      md_op;
    logic        is_csr;
    logic [1:0]  csr_cmd;    // 01 write, 10 set, 11 clear
    logic        csr_imm;    // uimm form
    logic        ecall;
    logic        ebreak;
    logic        mret;
    logic        fence_i;
    logic [31:0] imm;
  } dec_t;

endpackage
