// tb_fsm_ID: the decode stage. Random instructions of every supported kind
// (built with the encoder functions of rv_asm_pkg, with random registers and
// immediates) are presented with random ie_accept / flush; the registered
// ID/IE record must carry the expected one-hot operation, immediate, register
// fields and operand values, must hold while ie_accept is low, and must be
// invalid for a flushed instruction. Random 32-bit words that are not RV32I /
// SYSTEM / AMOSWAP encodings are checked to decode as ILLEGAL.
module tb_fsm_ID;
  import klessydra_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        accept, adv, vld, flush;
  logic [31:0] word, pc, rs1d, rs2d;
  harc_t       harc;
  logic [4:0]  rs1a, rs2a;
  ie_instr_t   r;
  int checks = 0, failures = 0;

  fsm_ID dut (.clk_i(clk), .rst_ni(rst_n), .ie_accept_i(accept), .id_advance_i(adv),
    .instr_valid_ID_i(vld), .instr_word_ID_i(word), .pc_ID_i(pc), .harc_ID_i(harc),
    .flush_instruction_ID_i(flush), .rs1_addr_o(rs1a), .rs2_addr_o(rs2a),
    .rs1_data_i(rs1d), .rs2_data_i(rs2d), .ie_instr_o(r));

  // random instruction with its expected decode
  task automatic pick(output logic [31:0] w, output op_idx_e op, output logic ui,
                      output logic [31:0] imm, output logic ic);
    int rd = $urandom % 32, a = $urandom % 32, b = $urandom % 32;
    int i12 = int'($urandom % 4096) - 2048;
    int off = (int'($urandom % 4096) - 2048) * 2;
    int off20 = (int'($urandom % (1 << 20)) - (1 << 19)) * 2;
    int csr = $urandom % 4096;
    ui = 0; imm = 32'(i12); ic = 1;
    case ($urandom % 40)
      0:  begin w = ADD(rd, a, b);  op = OP_ADD;  ic = 0; end
      1:  begin w = SUB(rd, a, b);  op = OP_SUB;  ic = 0; end
      2:  begin w = SLL(rd, a, b);  op = OP_SLL;  ic = 0; end
      3:  begin w = SLT(rd, a, b);  op = OP_SLT;  ic = 0; end
      4:  begin w = SLTU(rd, a, b); op = OP_SLTU; ic = 0; end
      5:  begin w = XOR(rd, a, b);  op = OP_XOR;  ic = 0; end
      6:  begin w = SRL(rd, a, b);  op = OP_SRL;  ic = 0; end
      7:  begin w = SRA(rd, a, b);  op = OP_SRA;  ic = 0; end
      8:  begin w = OR(rd, a, b);   op = OP_OR;   ic = 0; end
      9:  begin w = AND(rd, a, b);  op = OP_AND;  ic = 0; end
      10: begin w = ADDI(rd, a, i12); op = OP_ADD;  ui = 1; end
      11: begin w = SLTI(rd, a, i12); op = OP_SLT;  ui = 1; end
      12: begin w = XORI(rd, a, i12); op = OP_XOR;  ui = 1; end
      13: begin w = ORI(rd, a, i12);  op = OP_OR;   ui = 1; end
      14: begin w = ANDI(rd, a, i12); op = OP_AND;  ui = 1; end
      15: begin w = SLLI(rd, a, b); op = OP_SLL; ui = 1; imm = 32'(b); end
      16: begin w = SRLI(rd, a, b); op = OP_SRL; ui = 1; imm = 32'(b); end
      17: begin w = SRAI(rd, a, b); op = OP_SRA; ui = 1; imm = 32'(b) | 32'h400; end
      18: begin w = LUI(rd, csr * 256 + b); op = OP_LUI; imm = {20'(csr * 256 + b), 12'b0}; end
      19: begin w = AUIPC(rd, csr * 256 + b); op = OP_AUIPC; imm = {20'(csr * 256 + b), 12'b0}; end
      20: begin w = JAL(rd, off20); op = OP_JAL; imm = 32'(off20); end
      21: begin w = JALR(rd, a, i12); op = OP_JALR; end
      22: begin w = BEQ(a, b, off);  op = OP_BEQ;  imm = 32'(off); end
      23: begin w = BNE(a, b, off);  op = OP_BNE;  imm = 32'(off); end
      24: begin w = BLT(a, b, off);  op = OP_BLT;  imm = 32'(off); end
      25: begin w = BGE(a, b, off);  op = OP_BGE;  imm = 32'(off); end
      26: begin w = BLTU(a, b, off); op = OP_BLTU; imm = 32'(off); end
      27: begin w = BGEU(a, b, off); op = OP_BGEU; imm = 32'(off); end
      28: begin w = LB(rd, a, i12);  op = OP_LB;  end
      29: begin w = LH(rd, a, i12);  op = OP_LH;  end
      30: begin w = LW(rd, a, i12);  op = OP_LW;  end
      31: begin w = LBU(rd, a, i12); op = OP_LBU; end
      32: begin w = LHU(rd, a, i12); op = OP_LHU; end
      33: begin w = SB(b, a, i12); op = OP_SB; end
      34: begin w = SH(b, a, i12); op = OP_SH; end
      35: begin w = SW(b, a, i12); op = OP_SW; end
      36: begin
        case ($urandom % 6)
          0: begin w = CSRRW(rd, csr, a);  op = OP_CSRRW; end
          1: begin w = CSRRS(rd, csr, a);  op = OP_CSRRS; end
          2: begin w = CSRRC(rd, csr, a);  op = OP_CSRRC; end
          3: begin w = CSRRWI(rd, csr, a); op = OP_CSRRW; ui = 1; end
          4: begin w = CSRRSI(rd, csr, a); op = OP_CSRRS; ui = 1; end
          default: begin w = CSRRCI(rd, csr, a); op = OP_CSRRC; ui = 1; end
        endcase
        imm = 32'(a);
      end
      37: begin
        case ($urandom % 6)
          0: begin w = ECALL();  op = OP_ECALL;  end
          1: begin w = EBREAK(); op = OP_EBREAK; end
          2: begin w = MRET();   op = OP_MRET;   end
          3: begin w = WFI();    op = OP_WFI;    end
          4: begin w = FENCE();  op = OP_FENCE;  end
          default: begin w = 32'h0000_0073 | (32'(rd | 1) << 7); op = OP_ILLEGAL; end
        endcase
        ui = 0; ic = 0;
      end
      38: begin w = AMOSWAP(rd, b, a); op = OP_AMOSWAP; ic = 0; end
      default: begin
        // opcode outside the supported major opcodes
        w = {$urandom} & ~32'h7F | 32'h0000_005B; op = OP_ILLEGAL; ic = 0;
      end
    endcase
  endtask

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w, imm, exp_imm;
    op_idx_e op, exp_op;
    logic ui, exp_ui, exp_v, ic, exp_ic;
    logic [31:0] exp_w, exp_pc, exp_a, exp_b;
    harc_t exp_h;
    {accept, adv, vld, flush} = '0; word = 0; pc = 0; harc = 0; rs1d = 0; rs2d = 0;
    exp_v = 0; exp_ic = 0; exp_op = OP_ILLEGAL; exp_ui = 0; exp_imm = 0;
    exp_w = 0; exp_pc = 0; exp_a = 0; exp_b = 0; exp_h = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      pick(w, op, ui, imm, ic);
      word = w; pc = $urandom & ~32'h3; harc = harc_t'($urandom % 3);
      rs1d = $urandom; rs2d = $urandom;
      accept = ($urandom % 4) != 0;
      adv    = accept && ($urandom % 8) != 0;
      vld    = ($urandom % 8) != 0;
      flush  = ($urandom % 8) == 0;
      #1;
      checks++;
      if (rs1a != w[19:15] || rs2a != w[24:20]) begin
        failures++; $display("FAIL register addresses");
      end
      @(posedge clk); #1;
      if (accept) begin
        exp_v = adv && vld && !flush;
        exp_op = op; exp_ui = ui; exp_ic = ic; exp_imm = imm; exp_w = w; exp_pc = pc; exp_h = harc;
        exp_a = rs1d; exp_b = rs2d;
      end
      checks++;
      if (r.valid != exp_v) begin failures++; $display("FAIL valid %0d exp %0d", r.valid, exp_v); end
      if (exp_v) begin
        checks++;
        if (!r.op[exp_op] || !$onehot(r.op)) begin
          failures++; $display("FAIL %h: op %h expected %s", exp_w, r.op, exp_op.name());
        end
        if (exp_op != OP_ILLEGAL) begin
          checks++;
          if ((exp_ic && r.imm != exp_imm) || r.use_imm != exp_ui) begin
            failures++;
            $display("FAIL %h (%s): imm %h/%0d expected %h/%0d", exp_w, exp_op.name(),
                     r.imm, r.use_imm, exp_imm, exp_ui);
          end
          checks++;
          if (r.pc != exp_pc || r.harc != exp_h || r.rs1_val != exp_a || r.rs2_val != exp_b ||
              r.rd != exp_w[11:7] || r.rs1 != exp_w[19:15] || r.csr_addr != exp_w[31:20]) begin
            failures++; $display("FAIL %h: fields", exp_w);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
