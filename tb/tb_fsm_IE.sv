// tb_fsm_IE: the execute stage on its own. The testbench plays the ID/IE
// register (a new random instruction record is loaded whenever ie_accept is
// high), a data memory with random grant stalls and a CSR unit that answers
// one cycle after a request. A reference model predicts for every instruction
// the register write, the redirect (branch/jump target, EBREAK/WFI pc+4, MRET),
// the trap and its cause; memory contents are checked after stores and
// AMOSWAPs. Directed parts then check interrupt taking (the instruction is not
// executed), WFI putting a thread to sleep and waking it, the core going to
// SLEEP when no thread is active, and the DEBUG state.
module tb_fsm_IE;
  import klessydra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int MW = 64;
  localparam logic [31:0] MBASE = 32'h1000;

  ie_instr_t   cur;
  logic        accept, id_busy = 0, halt_req = 0, fetch_en = 0;
  ie_state_e   state;
  logic        run, core_busy, rf_we, redirect, set_br, set_exc, served_irq, set_mret;
  logic [4:0]  rf_waddr, irq_id_o;
  logic [31:0] rf_wdata, br_tgt;
  logic        csr_req, csr_done, csr_illegal;
  csr_op_e     csr_op;
  logic [11:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic        trap, bwe;
  logic [31:0] cause, tpc, badaddr;
  logic [2:0]  irq_pending = 0, irq_is_ext = 0, wake = 0, active;
  logic        irq_ack, ebreak, ev_ret, ev_ls, ev_br;
  logic        dreq, dwe, dgnt, drvalid, derr;
  logic [31:0] daddr, dwdata, drdata;
  logic [3:0]  dbe;
  int checks = 0, failures = 0, n_instr = 0, n_mem = 0, n_csr = 0, n_trap = 0, n_br = 0;

  fsm_IE #(.THREAD_POOL_SIZE(3)) dut (.clk_i(clk), .rst_ni(rst_n), .fetch_enable_i(fetch_en),
    .ie_instr_i(cur), .ie_accept_o(accept), .id_busy_i(id_busy), .debug_halt_req_i(halt_req),
    .state_o(state), .run_o(run), .core_busy_o(core_busy),
    .rf_we_o(rf_we), .rf_waddr_o(rf_waddr), .rf_wdata_o(rf_wdata),
    .redirect_o(redirect), .set_branch_condition_o(set_br), .branch_target_o(br_tgt),
    .set_except_condition_o(set_exc), .served_irq_o(served_irq),
    .set_mret_condition_o(set_mret),
    .csr_req_o(csr_req), .csr_op_o(csr_op), .csr_addr_o(csr_addr), .csr_wdata_o(csr_wdata),
    .csr_done_i(csr_done), .csr_rdata_i(csr_rdata), .csr_illegal_i(csr_illegal),
    .trap_o(trap), .trap_cause_o(cause), .trap_pc_o(tpc), .trap_badaddr_we_o(bwe),
    .trap_badaddr_o(badaddr), .irq_pending_i(irq_pending), .irq_is_ext_i(irq_is_ext),
    .wake_i(wake), .irq_id_i(5'd9), .irq_ack_o(irq_ack), .irq_id_o(irq_id_o),
    .thread_active_o(active), .ebreak_o(ebreak), .ev_retire_o(ev_ret), .ev_ldst_o(ev_ls),
    .ev_branch_o(ev_br), .data_req_o(dreq), .data_addr_o(daddr), .data_we_o(dwe),
    .data_be_o(dbe), .data_wdata_o(dwdata), .data_gnt_i(dgnt), .data_rvalid_i(drvalid),
    .data_rdata_i(drdata), .data_err_i(derr));

  // ---------------------------------------------------------------- data memory
  logic [31:0] mem [MW];
  logic stall = 0;
  int unsigned stall_pct = 30;
  assign dgnt = dreq && !stall;
  always @(posedge clk) begin
    drvalid <= dreq && dgnt;
    derr    <= 0;
    if (dreq && dgnt) begin
      if (daddr < MBASE || daddr >= MBASE + 4 * MW) begin
        derr <= 1; drdata <= 0;
      end else begin
        int i;
        i = int'((daddr - MBASE) >> 2);
        drdata <= mem[i];
        if (dwe) for (int b = 0; b < 4; b++) if (dbe[b]) mem[i][8*b +: 8] <= dwdata[8*b +: 8];
      end
    end
    stall <= ($urandom % 100) < stall_pct;
  end

  // ---------------------------------------------------------------- CSR unit
  logic csr_busy = 0;
  always @(posedge clk) csr_busy <= csr_req && !csr_busy;
  assign csr_done    = csr_busy;
  assign csr_rdata   = {20'hC5C5C, csr_addr};
  assign csr_illegal = csr_busy && csr_addr == 12'h123;

  // ---------------------------------------------------------------- reference
  typedef struct {
    logic        we;
    logic [31:0] wdata;
    int          kind;      // 0 none, 1 branch/jump, 2 exception, 3 mret
    logic [31:0] target;
    logic [31:0] cause;
    logic        mem_wr;
    int          mem_i;
    logic [31:0] mem_val;
  } exp_t;

  function automatic logic [31:0] mread(logic [31:0] a);
    return mem[int'((a - MBASE) >> 2) % MW];
  endfunction

  function automatic exp_t model(ie_instr_t x);
    exp_t e;
    logic [31:0] a = x.rs1_val, b = x.use_imm ? x.imm : x.rs2_val, ad, w, t;
    logic tk;
    e.we = 0; e.wdata = 0; e.kind = 0; e.target = 0; e.cause = 0;
    e.mem_wr = 0; e.mem_i = 0; e.mem_val = 0;
    ad = x.op[OP_AMOSWAP] ? x.rs1_val : x.rs1_val + x.imm;
    case (1'b1)
      x.op[OP_ADD]:  begin e.we = 1; e.wdata = a + b; end
      x.op[OP_SUB]:  begin e.we = 1; e.wdata = a - b; end
      x.op[OP_SLT]:  begin e.we = 1; e.wdata = 32'($signed(a) < $signed(b)); end
      x.op[OP_SLTU]: begin e.we = 1; e.wdata = 32'(a < b); end
      x.op[OP_AND]:  begin e.we = 1; e.wdata = a & b; end
      x.op[OP_OR]:   begin e.we = 1; e.wdata = a | b; end
      x.op[OP_XOR]:  begin e.we = 1; e.wdata = a ^ b; end
      x.op[OP_SLL]:  begin e.we = 1; e.wdata = a << b[4:0]; end
      x.op[OP_SRL]:  begin e.we = 1; e.wdata = a >> b[4:0]; end
      x.op[OP_SRA]:  begin e.we = 1; e.wdata = $signed(a) >>> b[4:0]; end
      x.op[OP_LUI]:  begin e.we = 1; e.wdata = x.imm; end
      x.op[OP_AUIPC]: begin e.we = 1; e.wdata = x.pc + x.imm; end
      x.op[OP_JAL], x.op[OP_JALR]: begin
        t = x.op[OP_JAL] ? x.pc + x.imm : (a + x.imm) & ~32'h1;
        if (t[1:0] != 0) begin e.kind = 2; e.cause = CAUSE_INSTR_MISALIGNED; end
        else begin e.we = 1; e.wdata = x.pc + 4; e.kind = 1; e.target = t; end
      end
      x.op[OP_BEQ], x.op[OP_BNE], x.op[OP_BLT], x.op[OP_BGE], x.op[OP_BLTU], x.op[OP_BGEU]: begin
        tk = x.op[OP_BEQ] ? x.rs1_val == x.rs2_val :
             x.op[OP_BNE] ? x.rs1_val != x.rs2_val :
             x.op[OP_BLT] ? $signed(x.rs1_val) < $signed(x.rs2_val) :
             x.op[OP_BGE] ? $signed(x.rs1_val) >= $signed(x.rs2_val) :
             x.op[OP_BLTU] ? x.rs1_val < x.rs2_val : x.rs1_val >= x.rs2_val;
        t = x.pc + x.imm;
        if (tk && t[1:0] != 0) begin e.kind = 2; e.cause = CAUSE_INSTR_MISALIGNED; end
        else if (tk) begin e.kind = 1; e.target = t; end
      end
      x.op[OP_FENCE]: ;
      x.op[OP_EBREAK], x.op[OP_WFI]: begin e.kind = 1; e.target = x.pc + 4; end
      x.op[OP_MRET]: e.kind = 3;
      x.op[OP_ECALL]: begin e.kind = 2; e.cause = CAUSE_ECALL_M; end
      x.op[OP_ILLEGAL]: begin e.kind = 2; e.cause = CAUSE_ILLEGAL_INSTR; end
      x.op[OP_CSRRW], x.op[OP_CSRRS], x.op[OP_CSRRC]: begin
        if (x.csr_addr == 12'h123) begin e.kind = 2; e.cause = CAUSE_ILLEGAL_INSTR; end
        else begin e.we = 1; e.wdata = {20'hC5C5C, x.csr_addr}; end
      end
      default: begin     // loads, stores, AMOSWAP
        logic ld = x.op[OP_LW] || x.op[OP_LH] || x.op[OP_LHU] || x.op[OP_LB] || x.op[OP_LBU];
        logic mis = ((x.op[OP_LW] || x.op[OP_SW] || x.op[OP_AMOSWAP]) && ad[1:0] != 0) ||
                    ((x.op[OP_LH] || x.op[OP_LHU] || x.op[OP_SH]) && ad[0]);
        logic out = ad < MBASE || ad >= MBASE + 4 * MW;
        if (mis) begin
          e.kind = 2; e.cause = ld ? CAUSE_LOAD_MISALIGNED : CAUSE_STORE_MISALIGNED;
        end else if (out) begin
          e.kind = 2; e.cause = (ld || x.op[OP_AMOSWAP]) ? CAUSE_LOAD_FAULT : CAUSE_STORE_FAULT;
        end else begin
          w = mread(ad);
          t = w >> (8 * ad[1:0]);
          e.mem_i = int'((ad - MBASE) >> 2);
          if (x.op[OP_LW])  begin e.we = 1; e.wdata = w; end
          if (x.op[OP_LH])  begin e.we = 1; e.wdata = {{16{t[15]}}, t[15:0]}; end
          if (x.op[OP_LHU]) begin e.we = 1; e.wdata = {16'b0, t[15:0]}; end
          if (x.op[OP_LB])  begin e.we = 1; e.wdata = {{24{t[7]}}, t[7:0]}; end
          if (x.op[OP_LBU]) begin e.we = 1; e.wdata = {24'b0, t[7:0]}; end
          if (x.op[OP_SW] || x.op[OP_AMOSWAP]) begin e.mem_wr = 1; e.mem_val = x.rs2_val; end
          if (x.op[OP_AMOSWAP]) begin e.we = 1; e.wdata = w; end
          if (x.op[OP_SH]) begin
            e.mem_wr = 1; e.mem_val = w;
            e.mem_val[16 * ad[1] +: 16] = x.rs2_val[15:0];
          end
          if (x.op[OP_SB]) begin
            e.mem_wr = 1; e.mem_val = w;
            e.mem_val[8 * ad[1:0] +: 8] = x.rs2_val[7:0];
          end
        end
      end
    endcase
    if (x.rd == 0 && e.we) e.we = 1;   // the register file ignores x0 itself
    return e;
  endfunction

  function automatic ie_instr_t rand_instr();
    ie_instr_t x;
    op_idx_e o = op_idx_e'($urandom % N_OPS);
    x.valid = 1; x.pc = ($urandom % 4096) * 4; x.harc = harc_t'($urandom % 3);
    x.op = '0; x.op[o] = 1'b1;
    x.use_imm = $urandom % 2;
    x.imm = ($urandom % 2) ? 32'($signed(12'($urandom))) : $urandom;
    x.rs1_val = ($urandom % 4 == 0) ? 32'($urandom % 8) : $urandom;
    x.rs2_val = ($urandom % 4 == 0) ? x.rs1_val : $urandom;
    x.rs1 = 5'($urandom); x.rd = 5'($urandom);
    x.csr_addr = ($urandom % 5 == 0) ? 12'h123 : 12'($urandom);
    if (o inside {OP_JAL, OP_BEQ, OP_BNE, OP_BLT, OP_BGE, OP_BLTU, OP_BGEU})
      x.imm = ($urandom % 8 == 0) ? 32'(int'($urandom % 64) - 32) * 2 : 32'(int'($urandom % 64) - 32) * 4;
    if (o inside {OP_LW, OP_LH, OP_LHU, OP_LB, OP_LBU, OP_SW, OP_SH, OP_SB, OP_AMOSWAP}) begin
      x.rs1_val = MBASE + 4 * ($urandom % MW) + (($urandom % 4 == 0) ? $urandom % 4 : 0);
      x.imm = ($urandom % 10 == 0) ? 32'h4000 : 32'(int'($urandom % 16) - 8) * 4;
      if (o == OP_AMOSWAP && ($urandom % 10 == 0)) x.rs1_val = 32'h8000;
    end
    if (o inside {OP_JALR}) x.imm = ($urandom % 8 == 0) ? 32'h1 : 32'h0;
    if (o inside {OP_JALR}) x.rs1_val = ($urandom % 8 == 0) ? 32'h102 : 32'h400;
    return x;
  endfunction

  // ---------------------------------------------------------------- checking
  exp_t e;
  logic checking = 0;
  task automatic chk(string n, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h (op %h pc %h)", n, got, exp, cur.op, cur.pc);
    end
  endtask

  always @(negedge clk) if (checking && cur.valid && state inside {IE_NORMAL, IE_DATA_GRANT,
                                     IE_DATA_VALID_WAIT, IE_CSR_WAIT}) begin
    if (accept) begin
      chk("rf_we", 32'(rf_we), 32'(e.we));
      if (e.we) begin chk("rf_waddr", 32'(rf_waddr), 32'(cur.rd)); chk("rf_wdata", rf_wdata, e.wdata); end
      chk("branch", 32'(set_br), 32'(e.kind == 1));
      if (e.kind == 1) chk("target", br_tgt, e.target);
      chk("exception", 32'(set_exc), 32'(e.kind == 2));
      chk("trap", 32'(trap), 32'(e.kind == 2));
      if (e.kind == 2) begin chk("cause", cause, e.cause); chk("trap pc", tpc, cur.pc); end
      chk("mret", 32'(set_mret), 32'(e.kind == 3));
      chk("redirect", 32'(redirect), 32'(e.kind != 0));
      if (e.kind == 2) n_trap++;
      if (e.kind == 1) n_br++;
    end else begin
      checks++;
      if (rf_we || redirect || trap) begin
        failures++; $display("FAIL side effect before completion (op %h)", cur.op);
      end
    end
  end

  // ID/IE register played by the testbench
  logic gen = 0;
  exp_t pend_e;
  logic pend_mem = 0;
  always @(posedge clk) begin
    if (pend_mem) begin
      checks++;
      if (mem[pend_e.mem_i] !== pend_e.mem_val) begin
        failures++; $display("FAIL memory word %0d = %h exp %h", pend_e.mem_i, mem[pend_e.mem_i], pend_e.mem_val);
      end
    end
    pend_mem <= 0;
    if (gen && accept && state inside {IE_NORMAL, IE_DATA_GRANT, IE_DATA_VALID_WAIT, IE_CSR_WAIT}) begin
      if (cur.valid) begin
        n_instr++;
        if (e.mem_wr && e.kind == 0) begin pend_e <= e; pend_mem <= 1; n_mem++; end
      end
      if ($urandom % 6 == 0) cur.valid <= 0;
      else begin
        ie_instr_t x;
        x = rand_instr();
        cur <= x;
      end
    end
  end
  // expectation follows the instruction record (memory read at issue time)
  always @(cur) e = model(cur);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    cur = '0;
    for (int i = 0; i < MW; i++) mem[i] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); #1;
    chk("core idle before fetch enable", 32'(core_busy), 32'(state != IE_SLEEP));
    @(negedge clk); fetch_en = 1;
    repeat (2) @(negedge clk);
    chk("NORMAL after fetch enable", 32'(state), 32'(IE_NORMAL));
    // random instruction stream
    // (random wake-ups keep WFI from putting every thread to sleep for good)
    checking = 1; gen = 1;
    do begin @(negedge clk); wake = 3'($urandom); end while (n_instr < 3000);
    gen = 0; wake = 0;
    do @(posedge clk); while (!(accept && state == IE_NORMAL));
    @(negedge clk); checking = 0; cur.valid = 0;
    $display("instructions=%0d mem=%0d traps=%0d branches=%0d", n_instr, n_mem, n_trap, n_br);

    // interrupt: the instruction at IE is not executed and becomes MEPC
    stall_pct = 0;
    @(negedge clk);
    cur = '0; cur.valid = 1; cur.pc = 32'h240; cur.harc = 0; cur.op[OP_ADD] = 1; cur.rd = 5;
    irq_pending = 3'b001; irq_is_ext = 3'b001;
    #1;
    chk("irq trap", 32'(trap && served_irq), 1);
    chk("irq cause", cause, CAUSE_IRQ_EXT);
    chk("irq mepc", tpc, 32'h240);
    chk("irq ack", 32'(irq_ack), 1);
    chk("instruction not executed", 32'(rf_we), 0);
    @(negedge clk); irq_pending = 0; irq_is_ext = 0;
    // another thread's instruction is not interrupted by thread 0's irq
    cur.harc = 1; irq_pending = 3'b001; #1;
    chk("irq only for its thread", 32'(trap), 0);
    @(negedge clk); irq_pending = 0;
    // WFI puts thread 2 to sleep
    cur = '0; cur.valid = 1; cur.pc = 32'h300; cur.harc = 2; cur.op[OP_WFI] = 1;
    @(negedge clk); cur.valid = 0;
    chk("thread 2 asleep", 32'(active), 32'b011);
    @(negedge clk); wake = 3'b100; @(negedge clk); wake = 0;
    chk("thread 2 woken", 32'(active), 32'b111);
    // all threads asleep: core goes to SLEEP and back
    for (int t = 0; t < 3; t++) begin
      cur = '0; cur.valid = 1; cur.pc = 32'h300; cur.harc = harc_t'(t); cur.op[OP_WFI] = 1;
      @(negedge clk);
    end
    cur.valid = 0;
    repeat (2) @(negedge clk);
    chk("SLEEP with no active thread", 32'(state), 32'(IE_SLEEP));
    chk("core_busy low in SLEEP", 32'(core_busy), 0);
    wake = 3'b010; @(negedge clk); wake = 0;
    repeat (2) @(negedge clk);
    chk("NORMAL after wake", 32'(state), 32'(IE_NORMAL));
    // debug halt with an empty pipe, then release
    halt_req = 1; repeat (2) @(negedge clk);
    chk("DEBUG state", 32'(state), 32'(IE_DEBUG));
    chk("no fetch while halted", 32'(run), 0);
    halt_req = 0; repeat (2) @(negedge clk);
    chk("NORMAL after release", 32'(state), 32'(IE_NORMAL));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
