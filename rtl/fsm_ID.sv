// fsm_ID: decode stage, "one synchronous state".
//
// In one cycle it reads both source operands of the instruction in the ID slot
// from the register file of that instruction's thread (harc_ID) and decodes
// the instruction word into a one-hot operation vector (one flip-flop per
// operation of klessydra_pkg::op_idx_e), an immediate, and the register and
// CSR fields. All of it is written into the ID/IE pipeline register when the
// execute stage accepts (ie_accept_i). An instruction marked by
// flush_instruction_ID_i, or an empty / void slot, enters as a bubble
// (valid = 0). Anything outside the supported instruction set decodes to
// OP_ILLEGAL, which the execute stage turns into an illegal-instruction trap.
// Supported: RV32I, FENCE / FENCE.I (no operation), ECALL, EBREAK, MRET, WFI,
// the six CSR instructions, AMOSWAP.W.
// Follows the paper: operand fetch concurrent with decoding, one-hot output,
// the instruction list of its Table 1. Own choice: the bit order of the
// one-hot vector and the fields carried beside it.
module fsm_ID
  import klessydra_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        ie_accept_i,
  input  logic        id_advance_i,
  input  logic        instr_valid_ID_i,
  input  logic [31:0] instr_word_ID_i,
  input  logic [31:0] pc_ID_i,
  input  harc_t       harc_ID_i,
  input  logic        flush_instruction_ID_i,
  // register file read ports
  output logic [4:0]  rs1_addr_o,
  output logic [4:0]  rs2_addr_o,
  input  logic [31:0] rs1_data_i,
  input  logic [31:0] rs2_data_i,
  // ID/IE register
  output ie_instr_t   ie_instr_o
);
  logic [31:0] w;
  op_onehot_t  op;
  logic        use_imm;
  logic [31:0] imm;
  logic [2:0]  f3;
  logic [6:0]  f7;

  assign w  = instr_word_ID_i;
  assign f3 = w[14:12];
  assign f7 = w[31:25];
  assign rs1_addr_o = w[19:15];
  assign rs2_addr_o = w[24:20];

  always_comb begin
    op      = '0;
    use_imm = 1'b0;
    imm     = '0;
    unique case (w[6:0])
      OPC_OP_IMM: begin
        use_imm = 1'b1;
        imm     = {{20{w[31]}}, w[31:20]};
        unique case (f3)
          3'b000: op[OP_ADD]  = 1'b1;
          3'b010: op[OP_SLT]  = 1'b1;
          3'b011: op[OP_SLTU] = 1'b1;
          3'b100: op[OP_XOR]  = 1'b1;
          3'b110: op[OP_OR]   = 1'b1;
          3'b111: op[OP_AND]  = 1'b1;
          3'b001: if (f7 == 7'b0) op[OP_SLL] = 1'b1; else op[OP_ILLEGAL] = 1'b1;
          3'b101: if (f7 == 7'b0) op[OP_SRL] = 1'b1;
                  else if (f7 == 7'b0100000) op[OP_SRA] = 1'b1;
                  else op[OP_ILLEGAL] = 1'b1;
          default: op[OP_ILLEGAL] = 1'b1;
        endcase
      end
      OPC_OP: begin
        unique case ({f7, f3})
          10'b0000000_000: op[OP_ADD]  = 1'b1;
          10'b0100000_000: op[OP_SUB]  = 1'b1;
          10'b0000000_001: op[OP_SLL]  = 1'b1;
          10'b0000000_010: op[OP_SLT]  = 1'b1;
          10'b0000000_011: op[OP_SLTU] = 1'b1;
          10'b0000000_100: op[OP_XOR]  = 1'b1;
          10'b0000000_101: op[OP_SRL]  = 1'b1;
          10'b0100000_101: op[OP_SRA]  = 1'b1;
          10'b0000000_110: op[OP_OR]   = 1'b1;
          10'b0000000_111: op[OP_AND]  = 1'b1;
          default:         op[OP_ILLEGAL] = 1'b1;
        endcase
      end
      OPC_LUI:   begin op[OP_LUI]   = 1'b1; imm = {w[31:12], 12'b0}; end
      OPC_AUIPC: begin op[OP_AUIPC] = 1'b1; imm = {w[31:12], 12'b0}; end
      OPC_JAL: begin
        op[OP_JAL] = 1'b1;
        imm = {{12{w[31]}}, w[19:12], w[20], w[30:21], 1'b0};
      end
      OPC_JALR: begin
        imm = {{20{w[31]}}, w[31:20]};
        if (f3 == 3'b000) op[OP_JALR] = 1'b1; else op[OP_ILLEGAL] = 1'b1;
      end
      OPC_BRANCH: begin
        imm = {{20{w[31]}}, w[7], w[30:25], w[11:8], 1'b0};
        unique case (f3)
          3'b000: op[OP_BEQ]  = 1'b1;
          3'b001: op[OP_BNE]  = 1'b1;
          3'b100: op[OP_BLT]  = 1'b1;
          3'b101: op[OP_BGE]  = 1'b1;
          3'b110: op[OP_BLTU] = 1'b1;
          3'b111: op[OP_BGEU] = 1'b1;
          default: op[OP_ILLEGAL] = 1'b1;
        endcase
      end
      OPC_LOAD: begin
        imm = {{20{w[31]}}, w[31:20]};
        unique case (f3)
          3'b000: op[OP_LB]  = 1'b1;
          3'b001: op[OP_LH]  = 1'b1;
          3'b010: op[OP_LW]  = 1'b1;
          3'b100: op[OP_LBU] = 1'b1;
          3'b101: op[OP_LHU] = 1'b1;
          default: op[OP_ILLEGAL] = 1'b1;
        endcase
      end
      OPC_STORE: begin
        imm = {{20{w[31]}}, w[31:25], w[11:7]};
        unique case (f3)
          3'b000: op[OP_SB] = 1'b1;
          3'b001: op[OP_SH] = 1'b1;
          3'b010: op[OP_SW] = 1'b1;
          default: op[OP_ILLEGAL] = 1'b1;
        endcase
      end
      OPC_MISC_MEM: begin
        if (f3 == 3'b000 || f3 == 3'b001) op[OP_FENCE] = 1'b1;
        else op[OP_ILLEGAL] = 1'b1;
      end
      OPC_SYSTEM: begin
        use_imm = f3[2];
        imm     = {27'b0, w[19:15]};
        unique case (f3)
          3'b000: begin
            if (w[19:7] != 13'b0) op[OP_ILLEGAL] = 1'b1;
            else unique case (w[31:20])
              12'h000: op[OP_ECALL]  = 1'b1;
              12'h001: op[OP_EBREAK] = 1'b1;
              12'h302: op[OP_MRET]   = 1'b1;
              12'h105: op[OP_WFI]    = 1'b1;
              default: op[OP_ILLEGAL] = 1'b1;
            endcase
          end
          3'b001, 3'b101: op[OP_CSRRW] = 1'b1;
          3'b010, 3'b110: op[OP_CSRRS] = 1'b1;
          3'b011, 3'b111: op[OP_CSRRC] = 1'b1;
          default: op[OP_ILLEGAL] = 1'b1;
        endcase
      end
      OPC_AMO: begin
        if (f3 == 3'b010 && w[31:27] == 5'b00001) op[OP_AMOSWAP] = 1'b1;
        else op[OP_ILLEGAL] = 1'b1;
      end
      default: op[OP_ILLEGAL] = 1'b1;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ie_instr_o <= '0;
    end else if (ie_accept_i) begin
      ie_instr_o.valid    <= id_advance_i && instr_valid_ID_i && !flush_instruction_ID_i;
      ie_instr_o.pc       <= pc_ID_i;
      ie_instr_o.harc     <= harc_ID_i;
      ie_instr_o.op       <= op;
      ie_instr_o.use_imm  <= use_imm;
      ie_instr_o.imm      <= imm;
      ie_instr_o.rs1_val  <= rs1_data_i;
      ie_instr_o.rs2_val  <= rs2_data_i;
      ie_instr_o.rs1      <= w[19:15];
      ie_instr_o.rd       <= w[11:7];
      ie_instr_o.csr_addr <= w[31:20];
    end
  end

`ifndef SYNTHESIS
  a_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni)
      ie_instr_o.valid |-> $onehot(ie_instr_o.op))
    else $error("fsm_ID: decoded operation is not one-hot");
`endif
endmodule
