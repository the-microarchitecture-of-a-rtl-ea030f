// fsm_IE: execute / write-back stage and the core's main state machine.
//
// It executes the instruction held in the ID/IE register (decoded one-hot by
// fsm_ID) for thread ie_instr_i.harc and writes its result into that thread's
// register file in the cycle the instruction completes. States:
//   RESET           first cycle after reset, before any fetch
//   SLEEP           idle: waiting for fetch_enable_i after reset, or every
//                   thread is asleep in WFI and the core waits for an
//                   interrupt (core_busy_o = 0)
//   DEBUG           halted under control of the debug unit
//   NORMAL          executing; single-cycle operations complete here
//   DATA_GRANT      data request issued, waiting for data_gnt_i
//   DATA_VALID_WAIT waiting for data_rvalid_i
//   CSR_WAIT        waiting one cycle for the thread's CSR unit
// Every instruction completes in NORMAL (ALU, LUI, AUIPC, jumps, branches,
// FENCE, ECALL, EBREAK, MRET, WFI, traps), after CSR_WAIT (CSR instructions),
// or after DATA_VALID_WAIT (loads, stores; AMOSWAP.W reads, then writes, the
// same word without letting any other thread in between).
// On completion it may redirect the thread's PC (branch taken, jump, trap,
// MRET, interrupt, EBREAK and WFI continue at pc+4), which also tells the
// flush logic to drop that thread's younger instructions. Interrupts are taken
// on an instruction of the interrupted thread reaching this stage: the
// instruction is not executed and becomes MEPC. WFI puts its thread to sleep
// (it leaves the harc counter's rotation) until its MIP has a pending bit.
// No forwarding and no interlock: the thread interleaving guarantees that an
// instruction's result is written before the next instruction of its thread
// reads the register file.
// Timing: ie_accept_o is high when the ID/IE register may load the next
// instruction (current one completes, or none is held). data_req_o may depend
// combinationally on the ID/IE register only, never on data_gnt_i.
// Follows the paper: the state list (the WFI state is replaced by per-thread
// sleep, see above), the Table 1 instruction set, no hardware interlocks,
// EBREAK handing control to the debug unit. Own choices: trap causes and the
// interrupt-taking point, the AMOSWAP sequence, byte-lane handling (Pulpino
// style: data aligned to its byte lanes, data_be_o marks them).
module fsm_IE
  import klessydra_pkg::*;
#(
  parameter int unsigned THREAD_POOL_SIZE = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        fetch_enable_i,
  input  ie_instr_t   ie_instr_i,
  output logic        ie_accept_o,
  input  logic        id_busy_i,            // IF/ID slot occupied
  input  logic        debug_halt_req_i,
  output ie_state_e   state_o,
  output logic        run_o,                // fetching allowed
  output logic        core_busy_o,
  // register file write port
  output logic        rf_we_o,
  output logic [4:0]  rf_waddr_o,
  output logic [31:0] rf_wdata_o,
  // redirect of thread ie_instr_i.harc
  output logic        redirect_o,
  output logic        set_branch_condition_o,
  output logic [31:0] branch_target_o,
  output logic        set_except_condition_o,
  output logic        served_irq_o,
  output logic        set_mret_condition_o,
  // CSR unit of thread ie_instr_i.harc
  output logic        csr_req_o,
  output csr_op_e     csr_op_o,
  output logic [11:0] csr_addr_o,
  output logic [31:0] csr_wdata_o,
  input  logic        csr_done_i,
  input  logic [31:0] csr_rdata_i,
  input  logic        csr_illegal_i,
  output logic        trap_o,
  output logic [31:0] trap_cause_o,
  output logic [31:0] trap_pc_o,
  output logic        trap_badaddr_we_o,
  output logic [31:0] trap_badaddr_o,
  // interrupts
  input  logic [THREAD_POOL_SIZE-1:0] irq_pending_i,
  input  logic [THREAD_POOL_SIZE-1:0] irq_is_ext_i,
  input  logic [THREAD_POOL_SIZE-1:0] wake_i,
  input  logic [4:0]  irq_id_i,
  output logic        irq_ack_o,
  output logic [4:0]  irq_id_o,
  output logic [THREAD_POOL_SIZE-1:0] thread_active_o,
  // debug and events
  output logic        ebreak_o,
  output logic        ev_retire_o,
  output logic        ev_ldst_o,
  output logic        ev_branch_o,
  // data memory port
  output logic        data_req_o,
  output logic [31:0] data_addr_o,
  output logic        data_we_o,
  output logic [3:0]  data_be_o,
  output logic [31:0] data_wdata_o,
  input  logic        data_gnt_i,
  input  logic        data_rvalid_i,
  input  logic [31:0] data_rdata_i,
  input  logic        data_err_i
);
  // thread-id bits needed to index the per-thread arrays
  localparam int unsigned IDX_W = (THREAD_POOL_SIZE > 1) ? $clog2(THREAD_POOL_SIZE) : 1;
  ie_state_e state_q, state_d;
  ie_instr_t ie;
  op_onehot_t op;
  logic      v;

  logic [THREAD_POOL_SIZE-1:0] sleeping_q;
  logic        amo_write_q;      // AMOSWAP.W in its write phase
  logic [31:0] amo_old_q;        // word read by AMOSWAP.W

  logic [31:0] opb, alu_res, addr, target, seq_pc;
  logic        is_load, is_store, is_mem, is_csr, is_branch, taken, misaligned;
  logic        done;
  logic        pipe_empty;
  logic        irq_take;
  logic [31:0] load_val;
  logic [4:0]  shamt;

  assign ie = ie_instr_i;
  assign op = ie.op;
  assign v  = ie.valid;

  assign opb    = ie.use_imm ? ie.imm : ie.rs2_val;
  assign shamt  = opb[4:0];
  assign seq_pc = ie.pc + 32'd4;
  assign addr   = ie.rs1_val + ie.imm;

  assign is_load  = op[OP_LW] || op[OP_LH] || op[OP_LHU] || op[OP_LB] || op[OP_LBU];
  assign is_store = op[OP_SW] || op[OP_SH] || op[OP_SB];
  assign is_mem   = is_load || is_store || op[OP_AMOSWAP];
  assign is_csr   = op[OP_CSRRW] || op[OP_CSRRS] || op[OP_CSRRC];
  assign is_branch = op[OP_BEQ] || op[OP_BNE] || op[OP_BLT] || op[OP_BGE] ||
                     op[OP_BLTU] || op[OP_BGEU];

  // ALU
  always_comb begin
    alu_res = '0;
    case (1'b1)
      op[OP_ADD]:   alu_res = ie.rs1_val + opb;
      op[OP_SUB]:   alu_res = ie.rs1_val - opb;
      op[OP_SLT]:   alu_res = 32'($signed(ie.rs1_val) < $signed(opb));
      op[OP_SLTU]:  alu_res = 32'(ie.rs1_val < opb);
      op[OP_AND]:   alu_res = ie.rs1_val & opb;
      op[OP_OR]:    alu_res = ie.rs1_val | opb;
      op[OP_XOR]:   alu_res = ie.rs1_val ^ opb;
      op[OP_SLL]:   alu_res = ie.rs1_val << shamt;
      op[OP_SRL]:   alu_res = ie.rs1_val >> shamt;
      op[OP_SRA]:   alu_res = 32'($signed(ie.rs1_val) >>> shamt);
      op[OP_LUI]:   alu_res = ie.imm;
      op[OP_AUIPC]: alu_res = ie.pc + ie.imm;
      op[OP_JAL], op[OP_JALR]: alu_res = seq_pc;
      default:      alu_res = '0;
    endcase
  end

  // branch decision and target
  always_comb begin
    taken = 1'b0;
    case (1'b1)
      op[OP_BEQ]:  taken = ie.rs1_val == ie.rs2_val;
      op[OP_BNE]:  taken = ie.rs1_val != ie.rs2_val;
      op[OP_BLT]:  taken = $signed(ie.rs1_val) <  $signed(ie.rs2_val);
      op[OP_BGE]:  taken = $signed(ie.rs1_val) >= $signed(ie.rs2_val);
      op[OP_BLTU]: taken = ie.rs1_val <  ie.rs2_val;
      op[OP_BGEU]: taken = ie.rs1_val >= ie.rs2_val;
      op[OP_JAL], op[OP_JALR]: taken = 1'b1;
      default:     taken = 1'b0;
    endcase
    target = op[OP_JALR] ? ((ie.rs1_val + ie.imm) & ~32'd1) : (ie.pc + ie.imm);
  end

  // memory access shape
  always_comb begin
    misaligned   = 1'b0;
    data_be_o    = 4'b1111;
    data_wdata_o = ie.rs2_val;
    data_addr_o  = op[OP_AMOSWAP] ? ie.rs1_val : addr;
    if (op[OP_LW] || op[OP_SW] || op[OP_AMOSWAP]) begin
      misaligned = data_addr_o[1:0] != 2'b00;
    end else if (op[OP_LH] || op[OP_LHU] || op[OP_SH]) begin
      misaligned   = data_addr_o[0];
      data_be_o    = data_addr_o[1] ? 4'b1100 : 4'b0011;
      data_wdata_o = {2{ie.rs2_val[15:0]}};
    end else if (op[OP_LB] || op[OP_LBU] || op[OP_SB]) begin
      data_be_o    = 4'b0001 << data_addr_o[1:0];
      data_wdata_o = {4{ie.rs2_val[7:0]}};
    end
    data_we_o = is_store || (op[OP_AMOSWAP] && amo_write_q);
  end

  always_comb begin
    logic [15:0] sh;
    sh = 16'(data_rdata_i >> {data_addr_o[1:0], 3'b000});
    case (1'b1)
      op[OP_LB]:  load_val = {{24{sh[7]}}, sh[7:0]};
      op[OP_LBU]: load_val = {24'b0, sh[7:0]};
      op[OP_LH]:  load_val = {{16{sh[15]}}, sh[15:0]};
      op[OP_LHU]: load_val = {16'b0, sh[15:0]};
      default:    load_val = data_rdata_i;
    endcase
  end

  assign irq_take   = v && irq_pending_i[ie.harc[IDX_W-1:0]];
  assign pipe_empty = !id_busy_i && !v;

  // main combinational block
  always_comb begin
    state_d                = state_q;
    done                   = 1'b0;
    rf_we_o                = 1'b0;
    rf_waddr_o             = ie.rd;
    rf_wdata_o             = alu_res;
    set_branch_condition_o = 1'b0;
    branch_target_o        = target;
    set_except_condition_o = 1'b0;
    served_irq_o           = 1'b0;
    set_mret_condition_o   = 1'b0;
    csr_req_o              = 1'b0;
    csr_op_o               = op[OP_CSRRW] ? CSR_OP_W : op[OP_CSRRS] ? CSR_OP_S : CSR_OP_C;
    csr_addr_o             = ie.csr_addr;
    csr_wdata_o            = ie.use_imm ? 32'(ie.rs1) : ie.rs1_val;
    trap_o                 = 1'b0;
    trap_cause_o           = CAUSE_ILLEGAL_INSTR;
    trap_pc_o              = ie.pc;
    trap_badaddr_we_o      = 1'b0;
    trap_badaddr_o         = data_addr_o;
    irq_ack_o              = 1'b0;
    ebreak_o               = 1'b0;
    ev_branch_o            = 1'b0;
    ev_ldst_o              = 1'b0;
    data_req_o             = 1'b0;

    unique case (state_q)
      IE_RESET: state_d = fetch_enable_i ? IE_NORMAL : IE_SLEEP;

      IE_SLEEP: if (fetch_enable_i && (|thread_active_o)) state_d = IE_NORMAL;

      IE_DEBUG: if (!debug_halt_req_i) state_d = IE_NORMAL;

      IE_NORMAL: begin
        if (!v) begin
          if (pipe_empty && debug_halt_req_i)  state_d = IE_DEBUG;
          else if (pipe_empty && !(|thread_active_o)) state_d = IE_SLEEP;
        end else if (irq_take) begin
          done         = 1'b1;
          trap_o       = 1'b1;
          served_irq_o = 1'b1;
          trap_cause_o = irq_is_ext_i[ie.harc[IDX_W-1:0]] ? CAUSE_IRQ_EXT : CAUSE_IRQ_SW;
          irq_ack_o    = irq_is_ext_i[ie.harc[IDX_W-1:0]];
        end else if (is_mem) begin
          if (misaligned) begin
            done              = 1'b1;
            trap_o            = 1'b1;
            set_except_condition_o = 1'b1;
            trap_cause_o      = is_load ? CAUSE_LOAD_MISALIGNED : CAUSE_STORE_MISALIGNED;
            trap_badaddr_we_o = 1'b1;
          end else begin
            data_req_o = 1'b1;
            state_d    = data_gnt_i ? IE_DATA_VALID_WAIT : IE_DATA_GRANT;
          end
        end else if (is_csr) begin
          csr_req_o = 1'b1;
          state_d   = IE_CSR_WAIT;
        end else if (op[OP_ILLEGAL] || op[OP_ECALL]) begin
          done         = 1'b1;
          trap_o       = 1'b1;
          set_except_condition_o = 1'b1;
          trap_cause_o = op[OP_ECALL] ? CAUSE_ECALL_M : CAUSE_ILLEGAL_INSTR;
        end else if (taken && target[1:0] != 2'b00) begin
          done              = 1'b1;
          trap_o            = 1'b1;
          set_except_condition_o = 1'b1;
          trap_cause_o      = CAUSE_INSTR_MISALIGNED;
          trap_badaddr_we_o = 1'b1;
          trap_badaddr_o    = target;
        end else begin
          done = 1'b1;
          rf_we_o = !(is_branch || op[OP_FENCE] || op[OP_EBREAK] || op[OP_MRET] ||
                      op[OP_WFI]);
          if (taken) begin
            set_branch_condition_o = 1'b1;
            ev_branch_o            = 1'b1;
          end else if (op[OP_EBREAK] || op[OP_WFI]) begin
            set_branch_condition_o = 1'b1;
            branch_target_o        = seq_pc;
            ebreak_o               = op[OP_EBREAK];
          end else if (op[OP_MRET]) begin
            set_mret_condition_o = 1'b1;
          end
        end
      end

      IE_DATA_GRANT: begin
        data_req_o = 1'b1;
        if (data_gnt_i) state_d = IE_DATA_VALID_WAIT;
      end

      IE_DATA_VALID_WAIT: if (data_rvalid_i) begin
        if (data_err_i) begin
          done              = 1'b1;
          state_d           = IE_NORMAL;
          trap_o            = 1'b1;
          set_except_condition_o = 1'b1;
          trap_cause_o      = data_we_o ? CAUSE_STORE_FAULT : CAUSE_LOAD_FAULT;
          trap_badaddr_we_o = 1'b1;
        end else if (op[OP_AMOSWAP] && !amo_write_q) begin
          state_d = IE_DATA_GRANT;      // now write rs2 to the same word
        end else begin
          done       = 1'b1;
          state_d    = IE_NORMAL;
          ev_ldst_o  = 1'b1;
          rf_we_o    = is_load || op[OP_AMOSWAP];
          rf_wdata_o = op[OP_AMOSWAP] ? amo_old_q : load_val;
        end
      end

      IE_CSR_WAIT: if (csr_done_i) begin
        done    = 1'b1;
        state_d = IE_NORMAL;
        if (csr_illegal_i) begin
          trap_o       = 1'b1;
          set_except_condition_o = 1'b1;
          trap_cause_o = CAUSE_ILLEGAL_INSTR;
        end else begin
          rf_we_o    = 1'b1;
          rf_wdata_o = csr_rdata_i;
        end
      end

      default: state_d = IE_RESET;
    endcase
  end

  assign redirect_o  = set_branch_condition_o || set_except_condition_o ||
                       served_irq_o || set_mret_condition_o;
  assign ev_retire_o = done && !trap_o;
  assign irq_id_o    = irq_id_i;
  assign ie_accept_o = (state_q == IE_NORMAL) ? (!v || done) :
                       (state_q == IE_DATA_GRANT || state_q == IE_DATA_VALID_WAIT ||
                        state_q == IE_CSR_WAIT) ? done : 1'b1;
  assign state_o     = state_q;
  assign run_o       = state_q inside {IE_NORMAL, IE_DATA_GRANT, IE_DATA_VALID_WAIT, IE_CSR_WAIT};
  assign core_busy_o = state_q != IE_SLEEP;
  assign thread_active_o = ~sleeping_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= IE_RESET;
      sleeping_q  <= '0;
      amo_write_q <= 1'b0;
      amo_old_q   <= '0;
    end else begin
      state_q <= state_d;
      for (int unsigned t = 0; t < THREAD_POOL_SIZE; t++)
        if (wake_i[t]) sleeping_q[t] <= 1'b0;
      if (state_q == IE_NORMAL && done && op[OP_WFI] && !irq_take && !wake_i[ie.harc[IDX_W-1:0]])
        sleeping_q[ie.harc[IDX_W-1:0]] <= 1'b1;
      if (state_q == IE_DATA_VALID_WAIT && data_rvalid_i && op[OP_AMOSWAP] && !amo_write_q) begin
        amo_write_q <= 1'b1;
        amo_old_q   <= data_rdata_i;
      end else if (done) begin
        amo_write_q <= 1'b0;
      end
    end
  end

`ifndef SYNTHESIS
  // Pulpino data port: request and its attributes stay stable until granted
  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
      data_req_o && !data_gnt_i |=> data_req_o && $stable(data_addr_o) && $stable(data_we_o))
    else $error("fsm_IE: data request withdrawn or changed before grant");
  a_valid_op: assert property (@(posedge clk_i) disable iff (!rst_ni)
      v |-> $onehot(op))
    else $error("fsm_IE: operation vector not one-hot");
`endif
endmodule
