// tb_klessydra_t0_core: end-to-end test of the Klessydra-T0 core at its
// default configuration (T023: three threads, baseline two).
//
// A program written with rv_asm_pkg runs on all three threads from the same
// boot address; each thread picks its work from MHARTID. Every thread sums
// 1..(10+t) in a branch loop, stores the sum with SW/SB/SH and reads it back
// with LW/LBU/LH, increments a shared counter under an AMOSWAP.W spin lock,
// and executes ECALL (trap handler at MTVEC counts the trap and returns with
// MEPC+4). Threads 1 and 2 then sleep in WFI; thread 0 enables interrupts and
// sleeps in WFI too, so the whole core enters its SLEEP state. The testbench
// then gates the clock for a while, raises irq_i; thread 0 takes the
// interrupt, records MIRQ, disables interrupts and executes EBREAK, which
// halts the core under the debug unit. Through the debug port the testbench
// reads back registers of every thread and the next PC, single-steps one
// instruction, and resumes; thread 0 stores a last value and sleeps.
// Memory stalls are drawn at random on both ports.
// Expected values are computed here from the program's intent, and every
// mechanism of the design (void slots, flushes, fetch and data stalls, CSR
// wait, traps, interrupts, thread sleep, core sleep, clock gating, debug
// halt, single step, AMOSWAP) is counted and must occur at least once.
module tb_klessydra_t0_core;
  import rv_asm_pkg::*;
  import klessydra_pkg::*;

  localparam int unsigned NT = 3;          // default THREAD_POOL_SIZE

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clock_en = 1'b1, fetch_enable = 1'b0;
  logic        instr_req, instr_gnt, instr_rvalid;
  logic [31:0] instr_addr, instr_rdata;
  logic        data_req, data_gnt, data_rvalid, data_we, data_err;
  logic [3:0]  data_be;
  logic [31:0] data_addr, data_wdata, data_rdata;
  logic        irq = 1'b0, irq_ack;
  logic [4:0]  irq_id_o;
  logic        dbg_req = 1'b0, dbg_gnt, dbg_rvalid, dbg_we = 1'b0, dbg_halted;
  logic [14:0] dbg_addr = '0;
  logic [31:0] dbg_wdata = '0, dbg_rdata;
  logic        core_busy;

  klessydra_t0_core dut (
    .clk_i(clk), .clock_en_i(clock_en), .test_en_i(1'b0), .rst_ni(rst_n),
    .boot_addr_i(32'h0), .core_id_i(4'd0), .cluster_id_i(6'd0),
    .instr_req_o(instr_req), .instr_gnt_i(instr_gnt), .instr_rvalid_i(instr_rvalid),
    .instr_addr_o(instr_addr), .instr_rdata_i(instr_rdata),
    .data_req_o(data_req), .data_gnt_i(data_gnt), .data_rvalid_i(data_rvalid),
    .data_we_o(data_we), .data_be_o(data_be), .data_addr_o(data_addr),
    .data_wdata_o(data_wdata), .data_rdata_i(data_rdata), .data_err_i(data_err),
    .irq_i(irq), .irq_id_i(5'd17), .irq_ack_o(irq_ack), .irq_id_o(irq_id_o),
    .debug_req_i(dbg_req), .debug_gnt_o(dbg_gnt), .debug_rvalid_o(dbg_rvalid),
    .debug_addr_i(dbg_addr), .debug_we_i(dbg_we), .debug_wdata_i(dbg_wdata),
    .debug_rdata_o(dbg_rdata), .debug_halted_o(dbg_halted),
    .debug_halt_i(1'b0), .debug_resume_i(1'b0),
    .fetch_enable_i(fetch_enable), .core_busy_o(core_busy), .ext_perf_counters_i(3'b000)
  );

  tb_mem_model #(.WORDS(2048), .INSTR_STALL_PCT(10), .DATA_STALL_PCT(30)) mem (
    .clk_i(clk),
    .instr_req_i(instr_req), .instr_gnt_o(instr_gnt), .instr_rvalid_o(instr_rvalid),
    .instr_addr_i(instr_addr), .instr_rdata_o(instr_rdata),
    .data_req_i(data_req), .data_gnt_o(data_gnt), .data_rvalid_o(data_rvalid),
    .data_we_i(data_we), .data_be_i(data_be), .data_addr_i(data_addr),
    .data_wdata_i(data_wdata), .data_rdata_o(data_rdata), .data_err_o(data_err)
  );

  int checks = 0, failures = 0;
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------ program
  localparam int MAIN = 128;     // word index of main (0x200)
  localparam int HND  = 32;      // word index of trap handler (0x80 = MTVEC reset)
  int ebreak_word;

  task automatic load_program();
    int m;
    for (int i = 'h1000 >> 2; i < 2048; i++) mem.mem[i] = '0;   // data area
    mem.mem[0] = JAL(0, MAIN*4);
    // trap handler
    mem.mem[HND+0] = CSRRS(20, 'h342, 0);     // x20 = mcause
    mem.mem[HND+1] = CSRRS(21, 'h341, 0);     // x21 = mepc
    mem.mem[HND+2] = BLT(20, 0, 16);          // interrupt -> HND+6
    mem.mem[HND+3] = ADDI(21, 21, 4);
    mem.mem[HND+4] = CSRRW(0, 'h341, 21);     // mepc += 4
    mem.mem[HND+5] = JAL(0, 12);              // -> HND+8
    mem.mem[HND+6] = CSRRS(22, 'hFC0, 0);     // x22 = mirq
    mem.mem[HND+7] = SW(22, 5, 'h500);        // [0x1500] = mirq
    mem.mem[HND+8] = ADDI(23, 23, 1);         // trap count
    mem.mem[HND+9] = MRET();
    // main
    m = MAIN;
    mem.mem[m++] = CSRRS(1, 'hF14, 0);        // x1 = mhartid
    mem.mem[m++] = ANDI(1, 1, 63);            // thread id
    mem.mem[m++] = SLLI(2, 1, 2);             // 4*t
    mem.mem[m++] = ADDI(3, 0, 10);
    mem.mem[m++] = ADD(3, 3, 1);              // n = 10 + t
    mem.mem[m++] = ADDI(4, 0, 0);
    mem.mem[m++] = ADD(4, 4, 3);              // loop: sum += n
    mem.mem[m++] = ADDI(3, 3, -1);
    mem.mem[m++] = BNE(3, 0, -8);
    mem.mem[m++] = LUI(5, 1);                 // x5 = 0x1000
    mem.mem[m++] = ADD(6, 5, 2);
    mem.mem[m++] = SW(4, 6, 0);
    mem.mem[m++] = LW(7, 6, 0);
    mem.mem[m++] = SB(4, 6, 'h100);
    mem.mem[m++] = LBU(8, 6, 'h100);
    mem.mem[m++] = SH(4, 6, 'h202);
    mem.mem[m++] = LH(9, 6, 'h202);
    mem.mem[m++] = ADDI(10, 0, 1);
    mem.mem[m++] = ADDI(11, 5, 'h300);        // lock at 0x1300, counter 0x1304
    mem.mem[m++] = AMOSWAP(12, 10, 11);       // lock:
    mem.mem[m++] = BNE(12, 0, -4);
    mem.mem[m++] = LW(13, 11, 4);
    mem.mem[m++] = ADDI(13, 13, 1);
    mem.mem[m++] = SW(13, 11, 4);
    mem.mem[m++] = SW(0, 11, 0);              // unlock
    mem.mem[m++] = ECALL();
    mem.mem[m++] = BNE(1, 0, 44);             // threads 1,2 -> sleep loop (m+11)
    mem.mem[m++] = CSRRSI(0, 'h300, 8);       // thread 0: MIE = 1
    mem.mem[m++] = WFI();
    mem.mem[m++] = CSRRCI(0, 'h300, 8);       // MIE = 0 (interrupt taken before this)
    ebreak_word = m;
    mem.mem[m++] = EBREAK();
    mem.mem[m++] = ADDI(14, 0, 'h55);         // single-stepped
    mem.mem[m++] = ADDI(14, 14, 1);
    mem.mem[m++] = ADDI(15, 0, 'h77);
    mem.mem[m++] = SW(14, 5, 'h400);          // [0x1400] = 0x56
    mem.mem[m++] = WFI();
    mem.mem[m++] = JAL(0, -4);
    mem.mem[m++] = WFI();                     // threads 1,2
    mem.mem[m++] = JAL(0, -4);
  endtask

  // ---------------------------------------------------- mechanism counters
  int n_void, n_flush, n_istall, n_dstall, n_csrwait, n_trap, n_irq, n_wfi,
      n_coresleep, n_gated, n_halt, n_step, n_amo, n_retired;
  initial {n_void, n_flush, n_istall, n_dstall, n_csrwait, n_trap, n_irq, n_wfi,
           n_coresleep, n_gated, n_halt, n_step, n_amo, n_retired} = '0;

  always @(posedge clk) if (rst_n) begin
    if (dut.slot_consumed && dut.void_IF) n_void++;
    if (dut.flush_ID && dut.id_advance && dut.instr_valid_ID) n_flush++;
    if (instr_req && !instr_gnt) n_istall++;
    if (data_req && !data_gnt) n_dstall++;
    if (dut.ie_state == IE_CSR_WAIT) n_csrwait++;
    if (dut.trap && !dut.served_irq) n_trap++;
    if (dut.served_irq) n_irq++;
    if (dut.u_fsm_IE.state_q == IE_NORMAL && dut.u_fsm_IE.done && dut.ie_instr.op[OP_WFI]) n_wfi++;
    if (dut.ie_state == IE_SLEEP && !core_busy) n_coresleep++;
    if (dut.ie_state == IE_DEBUG) n_halt++;
    if (dut.ev_retire && dut.ie_instr.op[OP_AMOSWAP]) n_amo++;
    if (dut.ev_retire) n_retired++;
  end
  always @(posedge dut.clk) if (!clock_en) n_gated++;   // must stay 0

  // --------------------------------------------------------- debug port
  task automatic dbg_read(input logic [14:0] a, output logic [31:0] d);
    @(negedge clk); dbg_req = 1; dbg_we = 0; dbg_addr = a;
    @(negedge clk); dbg_req = 0;
    d = dbg_rdata;
    checks++; if (!dbg_rvalid) begin failures++; $display("FAIL debug rvalid"); end
  endtask
  task automatic dbg_write(input logic [14:0] a, input logic [31:0] d);
    @(negedge clk); dbg_req = 1; dbg_we = 1; dbg_addr = a; dbg_wdata = d;
    @(negedge clk); dbg_req = 0; dbg_we = 0;
  endtask
  function automatic logic [14:0] gpr(int t, int r); return 15'(32'h400 + 128*t + 4*r); endfunction

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------------- test
  logic [31:0] d;
  int sum_t, gated_cycles;
  initial begin
    load_program();
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check("core idle before fetch_enable", 32'(core_busy), 0);
    fetch_enable = 1;

    // wait until every thread sleeps and the core enters SLEEP
    do @(posedge clk); while (!(core_busy));
    do @(posedge clk); while (!(dut.ie_state == IE_SLEEP));
    repeat (5) @(posedge clk);
    check("core_busy_o low in sleep", 32'(core_busy), 0);
    check("all threads asleep", 32'(dut.thread_active), 0);

    // gate the clock while idle
    @(negedge clk); clock_en = 0;
    repeat (10) @(posedge clk);
    @(negedge clk); clock_en = 1;
    check("no core clock edge while gated", 32'(n_gated), 0);

    // interrupt thread 0
    @(negedge clk); irq = 1;
    do @(posedge clk); while (!(irq_ack));
    check("irq_id_o", 32'(irq_id_o), 17);
    @(negedge clk); irq = 0;

    // EBREAK of thread 0 halts the core
    do @(posedge clk); while (!(dbg_halted));
    repeat (2) @(posedge clk);
    dbg_read(15'h000C, d); check("debug cause = ebreak", d, 3);
    dbg_read(15'h0000, d); check("DBG_CTRL.HALT set", d, 32'h0001_0000);
    for (int t = 0; t < NT; t++) begin
      sum_t = (10 + t) * (11 + t) / 2;
      dbg_read(gpr(t, 4), d);  check($sformatf("t%0d sum x4", t), d, sum_t);
      dbg_read(gpr(t, 7), d);  check($sformatf("t%0d lw x7", t), d, sum_t);
      dbg_read(gpr(t, 8), d);  check($sformatf("t%0d lbu x8", t), d, sum_t & 'hFF);
      dbg_read(gpr(t, 9), d);  check($sformatf("t%0d lh x9", t), d, sum_t);
      dbg_read(gpr(t, 1), d);  check($sformatf("t%0d mhartid x1", t), d, t);
      dbg_read(gpr(t, 20), d); check($sformatf("t%0d mcause x20", t), d,
                                     (t == 0) ? CAUSE_IRQ_EXT : CAUSE_ECALL_M);
      dbg_read(gpr(t, 23), d); check($sformatf("t%0d trap count x23", t), d, (t == 0) ? 2 : 1);
      check($sformatf("t%0d mem sum", t), mem.mem[('h1000 >> 2) + t], sum_t);
    end
    check("x0 of thread 1 is zero", 0, 0);
    dbg_read(gpr(1, 0), d); check("x0 reads 0", d, 0);
    check("shared counter under AMOSWAP lock", mem.mem['h1304 >> 2], NT);
    check("lock released", mem.mem['h1300 >> 2], 0);
    check("MIRQ stored by handler", mem.mem['h1500 >> 2], 17);
    dbg_read(15'h2000, d); check("NPC of thread 0 after EBREAK", d, 4 * (ebreak_word + 1));

    // debug write of a register, then single step one instruction
    dbg_write(gpr(0, 14), 32'h1234);
    dbg_read(gpr(0, 14), d); check("debug write x14", d, 32'h1234);
    dbg_write(15'h0000, 32'h0001_0001);      // HALT=1, SSTE=1
    dbg_write(15'h0000, 32'h0000_0001);      // resume in single-step mode
    repeat (3) @(posedge clk);
    do @(posedge clk); while (!(dbg_halted));
    repeat (2) @(posedge clk);
    n_step++;
    dbg_read(gpr(0, 14), d); check("single step executed one instruction", d, 32'h55);
    dbg_read(15'h0004, d);   check("DBG_HIT.SSTH", d, 1);
    dbg_read(15'h2000, d);   check("NPC after step", d, 4 * (ebreak_word + 2));
    dbg_write(15'h0000, 32'h0000_0000);      // resume, halt mode off
    do @(posedge clk); while (!(dut.ie_state == IE_SLEEP));
    repeat (2) @(posedge clk);
    check("run after resume", mem.mem['h1400 >> 2], 32'h56);

    // every mechanism must have happened
    $display("void=%0d flush=%0d istall=%0d dstall=%0d csrwait=%0d trap=%0d irq=%0d wfi=%0d coresleep=%0d halt=%0d step=%0d amo=%0d retired=%0d",
             n_void, n_flush, n_istall, n_dstall, n_csrwait, n_trap, n_irq, n_wfi,
             n_coresleep, n_halt, n_step, n_amo, n_retired);
    check("void slots inserted", 32'(n_void > 0), 1);
    check("branch flushes", 32'(n_flush > 0), 1);
    check("fetch stalls", 32'(n_istall > 0), 1);
    check("data stalls", 32'(n_dstall > 0), 1);
    check("CSR wait state", 32'(n_csrwait > 0), 1);
    check("exceptions", 32'(n_trap), NT);
    check("interrupts", 32'(n_irq), 1);
    check("WFI sleeps", 32'(n_wfi >= 4), 1);
    check("core sleep", 32'(n_coresleep > 0), 1);
    check("debug halt", 32'(n_halt > 0), 1);
    check("AMOSWAP", 32'(n_amo >= NT), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
