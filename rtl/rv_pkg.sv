// rv_pkg: types and constants shared by the RV64IM 8-stage pipeline (IF, IO, ID,
// EXR, EX, BR, MEM, WB) and its SoC.
//
// Holds the RISC-V major opcodes, the ALU operation codes produced by the ALU
// controller, the operand-source and write-back-source selects, the control
// word carried down the pipeline, and one struct per pipeline register.
// The write-back source codes (001 data memory, 010 ALU result, 011 CSR read
// value, 100 LUI immediate, 101 PC+4) are the ones printed on the write-back
// multiplexer of the 8-stage block diagram; every other encoding here is this
// design's own choice.
package rv_pkg;

  localparam int unsigned XLEN = 64;

  // RISC-V major opcodes (RV64IM_Zicsr)
  typedef enum logic [6:0] {
    OPC_LOAD      = 7'b0000011,
    OPC_MISC_MEM  = 7'b0001111,
    OPC_OP_IMM    = 7'b0010011,
    OPC_AUIPC     = 7'b0010111,
    OPC_OP_IMM_32 = 7'b0011011,
    OPC_STORE     = 7'b0100011,
    OPC_OP        = 7'b0110011,
    OPC_LUI       = 7'b0110111,
    OPC_OP_32     = 7'b0111011,
    OPC_BRANCH    = 7'b1100011,
    OPC_JALR      = 7'b1100111,
    OPC_JAL       = 7'b1101111,
    OPC_SYSTEM    = 7'b1110011
  } opcode_e;

  // instruction formats, as identified by the instruction decoder
  typedef enum logic [2:0] {
    FMT_R = 3'd0, FMT_I = 3'd1, FMT_S = 3'd2, FMT_B = 3'd3, FMT_U = 3'd4, FMT_J = 3'd5
  } fmt_e;

  // Operations of the dual-width ALU
  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_PASS_A, ALU_ANDN,
    ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU,
    ALU_DIV, ALU_DIVU, ALU_REM, ALU_REMU
  } alu_op_e;

  // Register write-back source (codes as printed on the WB multiplexer)
  typedef enum logic [2:0] {
    WB_NONE = 3'b000,
    WB_MEM  = 3'b001,
    WB_ALU  = 3'b010,
    WB_CSR  = 3'b011,
    WB_IMM  = 3'b100,
    WB_PC4  = 3'b101
  } wb_src_e;

  // ALU operand A source
  typedef enum logic [1:0] {
    A_RS1  = 2'd0,
    A_PC   = 2'd1,
    A_ZIMM = 2'd2   // CSR zero-extended 5-bit immediate (rs1 field)
  } srca_e;

  // ALU operand B source
  typedef enum logic [1:0] {
    B_RS2 = 2'd0,
    B_IMM = 2'd1,
    B_CSR = 2'd2    // CSR read value, for CSRRW/CSRRS/CSRRC write data
  } srcb_e;

  // Control word produced by the control unit in ID
  typedef struct packed {
    logic    reg_write;
    logic    mem_read;
    logic    mem_write;
    logic    branch;
    logic    jump;
    wb_src_e wb_src;
    srca_e   a_sel;
    srcb_e   b_sel;
    logic    csr_we;     // CSR instruction that writes its CSR
    logic    csr_op;     // any CSR instruction (reads its CSR)
    logic    is_word;    // OP-32 / OP-IMM-32 (W-suffix)
    logic    uses_rs1;
    logic    uses_rs2;
    logic    ecall;
    logic    ebreak;
    logic    mret;
    logic    illegal;
  } ctrl_t;

  localparam ctrl_t CTRL_NOP = '0;

  // IF/IO register
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
  } if_io_t;

  // IO/ID register
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [31:0]     instr;
    logic            b_est;     // predicted taken
  } io_id_t;

  // ID/EXR register
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [31:0]     instr;
    ctrl_t           ctrl;
    logic [XLEN-1:0] imm;
    logic [4:0]      rs1;
    logic [4:0]      rs2;
    logic [4:0]      rd;
    logic [XLEN-1:0] rs1_val;
    logic [XLEN-1:0] rs2_val;
    logic [XLEN-1:0] csr_rd;
    logic            b_est;
  } id_exr_t;

  // EXR/EX register: operands already resolved
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [31:0]     instr;
    ctrl_t           ctrl;
    logic [XLEN-1:0] imm;
    logic [4:0]      rd;
    logic [XLEN-1:0] src_a;
    logic [XLEN-1:0] src_b;
    logic [XLEN-1:0] store_data;
    logic [XLEN-1:0] csr_rd;
    logic            b_est;
  } exr_ex_t;

  // EX/BR register: registered ALU result and zero flag
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [31:0]     instr;
    ctrl_t           ctrl;
    logic [XLEN-1:0] imm;
    logic [4:0]      rd;
    logic [XLEN-1:0] alu_result;
    logic            alu_zero;
    logic [XLEN-1:0] store_data;
    logic [XLEN-1:0] csr_rd;
    logic            b_est;
  } ex_br_t;

  // BR/MEM register
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [31:0]     instr;
    ctrl_t           ctrl;
    logic [4:0]      rd;
    logic [XLEN-1:0] alu_result;
    logic [XLEN-1:0] store_data;
    logic [XLEN-1:0] fw_value;    // register value of a non-load, chosen in BR
    logic            is_mmio;     // address at or above MMIO_BASE, compared in BR
    logic            is_uart;     // address is the UART transmit register
  } br_mem_t;

  // MEM/WB register
  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [31:0]     instr;
    ctrl_t           ctrl;
    logic [4:0]      rd;
    logic [XLEN-1:0] rd_data;     // final register write value
    logic [XLEN-1:0] csr_wd;      // CSR write data
  } mem_wb_t;

  // Memory map of the data side
  localparam logic [XLEN-1:0] MMIO_BASE    = 64'h0000_0000_1000_0000;
  localparam logic [XLEN-1:0] UART_TX_ADDR = 64'h0000_0000_1000_0000;

  // Machine-mode CSR addresses
  localparam logic [11:0] CSR_MSTATUS  = 12'h300;
  localparam logic [11:0] CSR_MISA     = 12'h301;
  localparam logic [11:0] CSR_MIE      = 12'h304;
  localparam logic [11:0] CSR_MTVEC    = 12'h305;
  localparam logic [11:0] CSR_MSCRATCH = 12'h340;
  localparam logic [11:0] CSR_MEPC     = 12'h341;
  localparam logic [11:0] CSR_MCAUSE   = 12'h342;
  localparam logic [11:0] CSR_MTVAL    = 12'h343;
  localparam logic [11:0] CSR_MCYCLE   = 12'hB00;
  localparam logic [11:0] CSR_MINSTRET = 12'hB02;
  localparam logic [11:0] CSR_CYCLE    = 12'hC00;
  localparam logic [11:0] CSR_INSTRET  = 12'hC02;

  // Exception cause codes
  localparam logic [3:0] CAUSE_INSTR_MISALIGNED = 4'd0;
  localparam logic [3:0] CAUSE_ILLEGAL          = 4'd2;
  localparam logic [3:0] CAUSE_BREAKPOINT       = 4'd3;
  localparam logic [3:0] CAUSE_LOAD_MISALIGNED  = 4'd4;
  localparam logic [3:0] CAUSE_STORE_MISALIGNED = 4'd6;
  localparam logic [3:0] CAUSE_ECALL_M          = 4'd11;

endpackage
