// klessydra_t0_core: Klessydra-T0 interleaved multi-threaded RISC-V core.
//
// A 32-bit RV32I core with M-mode privileged support and AMOSWAP.W, whose pins
// are those of the Pulpino platform's core (the RI5CY pin set). It runs
// THREAD_POOL_SIZE hardware threads ("harcs"), each with its own PC, register
// file and CSR set, and fetches from a different thread every cycle. The
// pipeline has three stages:
//   IF  fsm_IF      sends pc[harc_IF] to the program memory
//   ID  fsm_ID      receives the word, reads the operands of thread harc_ID,
//                   decodes one-hot
//   IE  fsm_IE      executes and writes back; loads/stores/CSR take more cycles
// The harc counter picks the fetching thread, skipping sleeping threads, and
// inserts void (NOP) slots when fewer than THREAD_POOL_BASELINE threads are
// active, so consecutive instructions of one thread are always at least
// THREAD_POOL_BASELINE slots apart. With the default three stages and
// THREAD_POOL_BASELINE = 2 this removes every data hazard without forwarding or
// interlocks. A taken branch (jump, trap, ...) is resolved in IE; an
// instruction of the same thread already fetched (possible when fewer than
// three threads are active) is flushed, costing one cycle.
// Other parts: per-thread pc_updater units and the PC mux, flush logic, one
// csr_unit per thread (external interrupts go to thread 0), the debug unit,
// and a clock gate on clock_en_i.
// Default configuration: Klessydra-T023 (baseline 2, pool size 3).
// THREAD_POOL_SIZE may be 2..16; THREAD_POOL_BASELINE must be at least 2
// (the 2-stage T01x and 4-stage T03x variants are not built).
// Pin timing is Pulpino's: instr_/data_ requests are held until granted,
// rvalid comes one or more cycles after the grant; irq_i with irq_id_i is
// acknowledged by a one-cycle irq_ack_o with irq_id_o.
// ext_perf_counters_i is three bits wide: with it the pinout has the 321 I/O
// signals the paper counts; any of its bits is the "external" counter event.
module klessydra_t0_core
  import klessydra_pkg::*;
#(
  parameter int unsigned THREAD_POOL_SIZE     = 3,
  parameter int unsigned THREAD_POOL_BASELINE = 2
) (
  input  logic        clk_i,
  input  logic        clock_en_i,
  input  logic        test_en_i,
  input  logic        rst_ni,
  input  logic [31:0] boot_addr_i,
  input  logic [3:0]  core_id_i,
  input  logic [5:0]  cluster_id_i,
  // instruction memory
  output logic        instr_req_o,
  input  logic        instr_gnt_i,
  input  logic        instr_rvalid_i,
  output logic [31:0] instr_addr_o,
  input  logic [31:0] instr_rdata_i,
  // data memory
  output logic        data_req_o,
  input  logic        data_gnt_i,
  input  logic        data_rvalid_i,
  output logic        data_we_o,
  output logic [3:0]  data_be_o,
  output logic [31:0] data_addr_o,
  output logic [31:0] data_wdata_o,
  input  logic [31:0] data_rdata_i,
  input  logic        data_err_i,
  // interrupts
  input  logic        irq_i,
  input  logic [4:0]  irq_id_i,
  output logic        irq_ack_o,
  output logic [4:0]  irq_id_o,
  // debug
  input  logic        debug_req_i,
  output logic        debug_gnt_o,
  output logic        debug_rvalid_o,
  input  logic [14:0] debug_addr_i,
  input  logic        debug_we_i,
  input  logic [31:0] debug_wdata_i,
  output logic [31:0] debug_rdata_o,
  output logic        debug_halted_o,
  input  logic        debug_halt_i,
  input  logic        debug_resume_i,
  // misc
  input  logic        fetch_enable_i,
  output logic        core_busy_o,
  input  logic [2:0]  ext_perf_counters_i
);
  // thread-id bits needed to index the per-thread arrays
  localparam int unsigned IDX_W = (THREAD_POOL_SIZE > 1) ? $clog2(THREAD_POOL_SIZE) : 1;
  localparam int unsigned N = THREAD_POOL_SIZE;

  logic clk;

  // harc counter and PCs
  harc_t       harc_IF;
  logic        void_IF;
  logic [31:0] pc [N];
  logic [31:0] pc_IF;
  logic [N-1:0] thread_active;

  // IF / ID
  logic        fire, slot_consumed, id_ready, id_advance, id_load, id_busy;
  logic        instr_valid_ID;
  logic [31:0] instr_word_ID, pc_ID;
  harc_t       harc_ID;
  logic        fetch_en_IF;
  logic        flush_IF, flush_ID;

  // ID / IE
  ie_instr_t   ie_instr;
  logic        ie_accept;
  logic [4:0]  rs1_addr, rs2_addr;
  logic [31:0] rs1_data, rs2_data;
  harc_t       harc_IE;

  // IE outputs
  ie_state_e   ie_state;
  logic        run;
  logic        rf_we;
  logic [4:0]  rf_waddr;
  logic [31:0] rf_wdata;
  logic        redirect, set_branch, set_except, served_irq, set_mret;
  logic [31:0] branch_target;
  logic        csr_req;
  csr_op_e     csr_op;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata;
  logic        trap, trap_badaddr_we;
  logic [31:0] trap_cause, trap_pc, trap_badaddr;
  logic        ebreak, ev_retire, ev_ldst, ev_branch;

  // CSR units
  logic [N-1:0] csr_done, csr_illegal, irq_pending, irq_is_ext, wake;
  logic [31:0]  csr_rdata [N];
  logic [31:0]  mepc [N], mtvec [N];

  // debug
  logic        dbg_halt_req, dbg_fetch_allow;
  harc_t       dbg_rf_harc;
  logic [4:0]  dbg_rf_addr;
  logic        dbg_rf_we;
  logic [31:0] dbg_rf_wdata, dbg_rf_rdata;

  core_clock_gate u_clock_gate (
    .clk_i(clk_i), .en_i(clock_en_i), .test_en_i(test_en_i), .clk_o(clk)
  );

  harc_counter #(
    .THREAD_POOL_SIZE(N), .THREAD_POOL_BASELINE(THREAD_POOL_BASELINE)
  ) u_harc_counter (
    .clk_i(clk), .rst_ni(rst_ni), .advance_i(slot_consumed),
    .thread_active_i(thread_active), .harc_IF_o(harc_IF), .void_IF_o(void_IF)
  );

  assign harc_IE = ie_instr.harc;

  for (genvar t = 0; t < N; t++) begin : g_thread
    logic mine_IE;
    assign mine_IE = (harc_IE == harc_t'(t));

    pc_updater u_pc_updater (
      .clk_i(clk), .rst_ni(rst_ni), .boot_addr_i(boot_addr_i),
      .fetch_i(fire && harc_IF == harc_t'(t)),
      .set_branch_condition_i(set_branch && mine_IE),
      .branch_target_i(branch_target),
      .set_except_condition_i(set_except && mine_IE),
      .served_irq_i(served_irq && mine_IE),
      .set_mret_condition_i(set_mret && mine_IE),
      .mtvec_i(mtvec[t]), .mepc_i(mepc[t]),
      .pc_o(pc[t]), .branch_condition_pending_o()
    );

    csr_unit u_csr_unit (
      .clk_i(clk), .rst_ni(rst_ni), .boot_addr_i(boot_addr_i),
      .hartid_i({16'b0, cluster_id_i, core_id_i, 6'(t)}),
      .csr_req_i(csr_req && mine_IE), .csr_op_i(csr_op), .csr_addr_i(csr_addr),
      .csr_wdata_i(csr_wdata),
      .csr_done_o(csr_done[t]), .csr_rdata_o(csr_rdata[t]), .csr_illegal_o(csr_illegal[t]),
      .trap_i(trap && mine_IE), .trap_cause_i(trap_cause), .trap_pc_i(trap_pc),
      .trap_badaddr_we_i(trap_badaddr_we), .trap_badaddr_i(trap_badaddr),
      .mret_i(set_mret && mine_IE),
      .ext_irq_i((t == 0) ? irq_i : 1'b0), .irq_id_i(irq_id_i),
      .irq_pending_o(irq_pending[t]), .irq_is_ext_o(irq_is_ext[t]), .wake_o(wake[t]),
      .ev_retire_i(ev_retire && mine_IE), .ev_ldst_i(ev_ldst && mine_IE),
      .ev_branch_i(ev_branch && mine_IE), .ev_ext_i(|ext_perf_counters_i),
      .mepc_o(mepc[t]), .mtvec_o(mtvec[t])
    );
  end

  // PC mux of the scheme: the fetching thread's PC
  assign pc_IF = pc[harc_IF[IDX_W-1:0]];

  assign fetch_en_IF = run && dbg_fetch_allow;

  fsm_IF u_fsm_IF (
    .clk_i(clk), .rst_ni(rst_ni),
    .fetch_enable_i(fetch_en_IF), .ie_accept_i(ie_accept),
    .harc_IF_i(harc_IF), .void_IF_i(void_IF), .pc_IF_i(pc_IF),
    .instr_req_o(instr_req_o), .instr_addr_o(instr_addr_o), .instr_gnt_i(instr_gnt_i),
    .instr_rvalid_i(instr_rvalid_i), .instr_rdata_i(instr_rdata_i),
    .fire_o(fire), .slot_consumed_o(slot_consumed),
    .id_ready_o(id_ready), .id_advance_o(id_advance), .id_load_o(id_load),
    .instr_valid_ID_o(instr_valid_ID), .instr_word_ID_o(instr_word_ID),
    .pc_ID_o(pc_ID), .harc_ID_o(harc_ID), .busy_o(id_busy)
  );

  flush_logic u_flush_logic (
    .clk_i(clk), .rst_ni(rst_ni),
    .redirect_i(redirect), .harc_IE_i(harc_IE),
    .fetch_IF_i(fire), .harc_IF_i(harc_IF),
    .slot_ID_i(id_busy), .harc_ID_i(harc_ID), .id_load_i(id_load),
    .flush_instruction_IF_o(flush_IF), .flush_instruction_ID_o(flush_ID)
  );

  reg_file #(.THREAD_POOL_SIZE(N)) u_reg_file (
    .clk_i(clk), .rst_ni(rst_ni),
    .rd_harc_i(harc_ID), .raddr_a_i(rs1_addr), .rdata_a_o(rs1_data),
    .raddr_b_i(rs2_addr), .rdata_b_o(rs2_data),
    .we_i(rf_we), .wr_harc_i(harc_IE), .waddr_i(rf_waddr), .wdata_i(rf_wdata),
    .dbg_harc_i(dbg_rf_harc), .dbg_addr_i(dbg_rf_addr), .dbg_we_i(dbg_rf_we),
    .dbg_wdata_i(dbg_rf_wdata), .dbg_rdata_o(dbg_rf_rdata)
  );

  fsm_ID u_fsm_ID (
    .clk_i(clk), .rst_ni(rst_ni),
    .ie_accept_i(ie_accept), .id_advance_i(id_advance),
    .instr_valid_ID_i(instr_valid_ID), .instr_word_ID_i(instr_word_ID),
    .pc_ID_i(pc_ID), .harc_ID_i(harc_ID), .flush_instruction_ID_i(flush_ID),
    .rs1_addr_o(rs1_addr), .rs2_addr_o(rs2_addr),
    .rs1_data_i(rs1_data), .rs2_data_i(rs2_data),
    .ie_instr_o(ie_instr)
  );

  fsm_IE #(.THREAD_POOL_SIZE(N)) u_fsm_IE (
    .clk_i(clk), .rst_ni(rst_ni), .fetch_enable_i(fetch_enable_i),
    .ie_instr_i(ie_instr), .ie_accept_o(ie_accept), .id_busy_i(id_busy),
    .debug_halt_req_i(dbg_halt_req), .state_o(ie_state), .run_o(run),
    .core_busy_o(core_busy_o),
    .rf_we_o(rf_we), .rf_waddr_o(rf_waddr), .rf_wdata_o(rf_wdata),
    .redirect_o(redirect), .set_branch_condition_o(set_branch),
    .branch_target_o(branch_target), .set_except_condition_o(set_except),
    .served_irq_o(served_irq), .set_mret_condition_o(set_mret),
    .csr_req_o(csr_req), .csr_op_o(csr_op), .csr_addr_o(csr_addr), .csr_wdata_o(csr_wdata),
    .csr_done_i(csr_done[harc_IE[IDX_W-1:0]]), .csr_rdata_i(csr_rdata[harc_IE[IDX_W-1:0]]),
    .csr_illegal_i(csr_illegal[harc_IE[IDX_W-1:0]]),
    .trap_o(trap), .trap_cause_o(trap_cause), .trap_pc_o(trap_pc),
    .trap_badaddr_we_o(trap_badaddr_we), .trap_badaddr_o(trap_badaddr),
    .irq_pending_i(irq_pending), .irq_is_ext_i(irq_is_ext), .wake_i(wake),
    .irq_id_i(irq_id_i), .irq_ack_o(irq_ack_o), .irq_id_o(irq_id_o),
    .thread_active_o(thread_active),
    .ebreak_o(ebreak), .ev_retire_o(ev_retire), .ev_ldst_o(ev_ldst), .ev_branch_o(ev_branch),
    .data_req_o(data_req_o), .data_addr_o(data_addr_o), .data_we_o(data_we_o),
    .data_be_o(data_be_o), .data_wdata_o(data_wdata_o), .data_gnt_i(data_gnt_i),
    .data_rvalid_i(data_rvalid_i), .data_rdata_i(data_rdata_i), .data_err_i(data_err_i)
  );

  debug_unit #(.THREAD_POOL_SIZE(N)) u_debug_unit (
    .clk_i(clk), .rst_ni(rst_ni),
    .debug_req_i(debug_req_i), .debug_gnt_o(debug_gnt_o), .debug_rvalid_o(debug_rvalid_o),
    .debug_addr_i(debug_addr_i), .debug_we_i(debug_we_i), .debug_wdata_i(debug_wdata_i),
    .debug_rdata_o(debug_rdata_o), .debug_halt_i(debug_halt_i),
    .debug_resume_i(debug_resume_i), .debug_halted_o(debug_halted_o),
    .ebreak_i(ebreak), .halted_i(ie_state == IE_DEBUG), .fetch_i(fire),
    .halt_req_o(dbg_halt_req), .fetch_allow_o(dbg_fetch_allow), .pc_i(pc),
    .rf_harc_o(dbg_rf_harc), .rf_addr_o(dbg_rf_addr), .rf_we_o(dbg_rf_we),
    .rf_wdata_o(dbg_rf_wdata), .rf_rdata_i(dbg_rf_rdata)
  );

  // unused: flush of the IF slot is applied through flush_instruction_ID
  logic unused;
  assign unused = flush_IF ^ id_ready;
endmodule
