// klessydra_pkg: types and constants shared by the Klessydra-T0 core modules.
//
// It holds the RISC-V opcodes of the RV32I / M-mode / AMOSWAP.W subset the core
// executes, the index of every decoded operation in the one-hot operation
// vector that the decode stage (fsm_ID) hands to the execute stage (fsm_IE),
// the record carried by the ID/IE pipeline register, the execute-stage state
// enumeration and the CSR addresses.
// Follows the paper: the instruction list, the one-hot decode format, the
// list of execute-stage states and the list of CSRs. This design's own choices:
// the numbering of the one-hot vector, the CSR addresses of the two
// non-standard CSRs (MESTATUS, MIRQ), the reset values and the trap causes,
// which follow the RISC-V privileged specification v1.10 and Pulpino.
package klessydra_pkg;

  // Largest supported thread pool; the thread id (harc) is carried in this width.
  localparam int unsigned HARC_W = 4;
  typedef logic [HARC_W-1:0] harc_t;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_OP_IMM   = 7'b0010011;
  localparam logic [6:0] OPC_OP       = 7'b0110011;
  localparam logic [6:0] OPC_LUI      = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC    = 7'b0010111;
  localparam logic [6:0] OPC_JAL      = 7'b1101111;
  localparam logic [6:0] OPC_JALR     = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH   = 7'b1100011;
  localparam logic [6:0] OPC_LOAD     = 7'b0000011;
  localparam logic [6:0] OPC_STORE    = 7'b0100011;
  localparam logic [6:0] OPC_MISC_MEM = 7'b0001111;
  localparam logic [6:0] OPC_SYSTEM   = 7'b1110011;
  localparam logic [6:0] OPC_AMO      = 7'b0101111;

  // ------------------------------------------- one-hot operation positions
  typedef enum int unsigned {
    OP_ADD, OP_SUB, OP_SLT, OP_SLTU, OP_AND, OP_OR, OP_XOR, OP_SLL, OP_SRL, OP_SRA,
    OP_LUI, OP_AUIPC, OP_JAL, OP_JALR,
    OP_BEQ, OP_BNE, OP_BLT, OP_BLTU, OP_BGE, OP_BGEU,
    OP_LW, OP_LH, OP_LHU, OP_LB, OP_LBU, OP_SW, OP_SH, OP_SB,
    OP_FENCE, OP_ECALL, OP_EBREAK, OP_MRET, OP_WFI,
    OP_CSRRW, OP_CSRRS, OP_CSRRC, OP_AMOSWAP, OP_ILLEGAL,
    N_OPS
  } op_idx_e;

  typedef logic [N_OPS-1:0] op_onehot_t;

  // Content of the ID/IE pipeline register (Fig. 3: Instr_Valid_IE,
  // Instr_Word_IE, PC_IE, harc_IE, Data_values_IE) after one-hot decoding.
  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    harc_t       harc;
    op_onehot_t  op;
    logic        use_imm;   // second ALU operand is imm (OP_IMM, CSR*I)
    logic [31:0] imm;       // sign-extended immediate of the instruction format
    logic [31:0] rs1_val;
    logic [31:0] rs2_val;
    logic [4:0]  rs1;       // also the zimm of CSRR*I
    logic [4:0]  rd;
    logic [11:0] csr_addr;
  } ie_instr_t;

  // ------------------------------------------------ execute-stage states
  typedef enum logic [2:0] {
    IE_RESET, IE_SLEEP, IE_DEBUG, IE_NORMAL, IE_DATA_GRANT, IE_DATA_VALID_WAIT,
    IE_CSR_WAIT
  } ie_state_e;

  // ------------------------------------------------------ CSR operations
  typedef enum logic [1:0] {CSR_OP_W, CSR_OP_S, CSR_OP_C} csr_op_e;

  // ------------------------------------------------------ CSR addresses
  localparam logic [11:0] CSR_MSTATUS     = 12'h300;
  localparam logic [11:0] CSR_MTVEC       = 12'h305;
  localparam logic [11:0] CSR_MHPMEVENT3  = 12'h323;
  localparam logic [11:0] CSR_MEPC        = 12'h341;
  localparam logic [11:0] CSR_MCAUSE      = 12'h342;
  localparam logic [11:0] CSR_MBADADDR    = 12'h343;
  localparam logic [11:0] CSR_MIP         = 12'h344;
  localparam logic [11:0] CSR_PCER        = 12'h7A0;
  localparam logic [11:0] CSR_MESTATUS    = 12'h7C0;
  localparam logic [11:0] CSR_MHPMCOUNTER3= 12'hB03;
  localparam logic [11:0] CSR_MCPUID      = 12'hF00;
  localparam logic [11:0] CSR_MIMPID      = 12'hF13;
  localparam logic [11:0] CSR_MHARTID     = 12'hF14;
  localparam logic [11:0] CSR_MIRQ        = 12'hFC0;

  localparam logic [31:0] MCPUID_VALUE = 32'h0000_0101; // RV32 with I and (AMOSWAP of) A
  localparam logic [31:0] MIMPID_VALUE = 32'h0000_0023; // implementation tag: T0, B=2, S=3

  // MSTATUS / MIP bit positions (RISC-V privileged v1.10)
  localparam int unsigned MSTATUS_MIE = 3;
  localparam int unsigned MIP_MSIP    = 3;
  localparam int unsigned MIP_MEIP    = 11;

  // Trap causes (RISC-V privileged v1.10)
  localparam logic [31:0] CAUSE_INSTR_MISALIGNED = 32'd0;
  localparam logic [31:0] CAUSE_ILLEGAL_INSTR    = 32'd2;
  localparam logic [31:0] CAUSE_BREAKPOINT       = 32'd3;
  localparam logic [31:0] CAUSE_LOAD_MISALIGNED  = 32'd4;
  localparam logic [31:0] CAUSE_LOAD_FAULT       = 32'd5;
  localparam logic [31:0] CAUSE_STORE_MISALIGNED = 32'd6;
  localparam logic [31:0] CAUSE_STORE_FAULT      = 32'd7;
  localparam logic [31:0] CAUSE_ECALL_M          = 32'd11;
  localparam logic [31:0] CAUSE_IRQ_SW           = 32'h8000_0003;
  localparam logic [31:0] CAUSE_IRQ_EXT          = 32'h8000_000B;

  // Offset of the trap vector from boot_addr_i after reset (Pulpino places its
  // vector table at the boot address; 0x80 leaves the reset entry free).
  localparam logic [31:0] MTVEC_RESET_OFFSET = 32'h0000_0080;

endpackage
