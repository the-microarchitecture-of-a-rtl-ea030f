// tb_throughput_bench: one throughput measurement bench (used by
// tb_workload_throughput). It holds a core with THREAD_POOL_SIZE = POOL and
// baseline 2, and a memory answering every access in one cycle, and runs the
// throughput kernel with 1 .. POOL active threads. Each active thread loops
// over k = 6 instructions (five ALU operations and a taken jump); the other
// threads execute WFI and stay asleep. After a 200-cycle warm-up the
// instructions retired in 1400 cycles give the IPC, which is checked against
//   - the interleaving model: k/(2(k+1)) for one thread (a void slot after
//     every instruction, one flushed slot per taken jump), k/(k+1) for two
//     (one flushed slot per taken jump), 1 for three or more (no bubbles);
//   - the published MIPS figures of that configuration times its published
//     cycle time, within 2 %.
// done_o rises when all runs are over; checks_o / failures_o count the checks.
module tb_throughput_bench #(
  parameter int unsigned POOL = 3,       // THREAD_POOL_SIZE of the core under test
  parameter real         CYCLE_NS = 9.7, // published cycle time of that core
  parameter real         MIPS_1 = 44.44, // published MIPS, 1 / 2 / 3+ threads
  parameter real         MIPS_2 = 88.87,
  parameter real         MIPS_3 = 103.09
) (
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);
  import rv_asm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        fetch_enable = 1'b0;
  logic        instr_req, instr_gnt, instr_rvalid;
  logic [31:0] instr_addr, instr_rdata;
  logic        data_req, data_gnt, data_rvalid, data_we, data_err;
  logic [3:0]  data_be;
  logic [31:0] data_addr, data_wdata, data_rdata;
  logic        irq_ack, dbg_gnt, dbg_rvalid, dbg_halted, core_busy;
  logic [4:0]  irq_id_o;
  logic [31:0] dbg_rdata;

  klessydra_t0_core #(.THREAD_POOL_SIZE(POOL), .THREAD_POOL_BASELINE(2)) dut (
    .clk_i(clk), .clock_en_i(1'b1), .test_en_i(1'b0), .rst_ni(rst_n),
    .boot_addr_i(32'h0), .core_id_i(4'd0), .cluster_id_i(6'd0),
    .instr_req_o(instr_req), .instr_gnt_i(instr_gnt), .instr_rvalid_i(instr_rvalid),
    .instr_addr_o(instr_addr), .instr_rdata_i(instr_rdata),
    .data_req_o(data_req), .data_gnt_i(data_gnt), .data_rvalid_i(data_rvalid),
    .data_we_o(data_we), .data_be_o(data_be), .data_addr_o(data_addr),
    .data_wdata_o(data_wdata), .data_rdata_i(data_rdata), .data_err_i(data_err),
    .irq_i(1'b0), .irq_id_i(5'd0), .irq_ack_o(irq_ack), .irq_id_o(irq_id_o),
    .debug_req_i(1'b0), .debug_gnt_o(dbg_gnt), .debug_rvalid_o(dbg_rvalid),
    .debug_addr_i(15'h0), .debug_we_i(1'b0), .debug_wdata_i(32'h0),
    .debug_rdata_o(dbg_rdata), .debug_halted_o(dbg_halted),
    .debug_halt_i(1'b0), .debug_resume_i(1'b0),
    .fetch_enable_i(fetch_enable), .core_busy_o(core_busy), .ext_perf_counters_i(3'b000)
  );

  tb_mem_model #(.WORDS(2048), .INSTR_STALL_PCT(0), .DATA_STALL_PCT(0)) mem (
    .clk_i(clk),
    .instr_req_i(instr_req), .instr_gnt_o(instr_gnt), .instr_rvalid_o(instr_rvalid),
    .instr_addr_i(instr_addr), .instr_rdata_o(instr_rdata),
    .data_req_i(data_req), .data_gnt_o(data_gnt), .data_rvalid_o(data_rvalid),
    .data_we_i(data_we), .data_be_i(data_be), .data_addr_i(data_addr),
    .data_wdata_i(data_wdata), .data_rdata_o(data_rdata), .data_err_o(data_err)
  );

  int checks = 0, failures = 0;
  assign checks_o = checks;
  assign failures_o = failures;
  initial done_o = 1'b0;
  int retired = 0;
  always @(posedge clk) if (dut.ev_retire) retired++;

  localparam int K = 6, WINDOW = 1400;

  task automatic load_program(int nthreads);
    int m = 0;
    mem.mem['h1000 >> 2] = nthreads;
    mem.mem[m++] = CSRRS(1, 'hF14, 0);        // x1 = mhartid
    mem.mem[m++] = ANDI(1, 1, 63);            // thread id
    mem.mem[m++] = LUI(5, 1);                 // x5 = 0x1000
    mem.mem[m++] = LW(6, 5, 0);               // x6 = active thread count
    mem.mem[m++] = BGE(1, 6, 4 * (K + 1));    // not active -> sleep
    mem.mem[m++] = ADDI(10, 10, 1);           // kernel (K instructions)
    mem.mem[m++] = ADDI(11, 11, 3);
    mem.mem[m++] = ADD(12, 10, 11);
    mem.mem[m++] = XOR(13, 12, 10);
    mem.mem[m++] = SLLI(14, 13, 1);
    mem.mem[m++] = JAL(0, -4 * (K - 1));
    mem.mem[m++] = WFI();                     // sleep
    mem.mem[m++] = JAL(0, -4);
  endtask

  initial begin
    real ipc, model, paper;
    int r0;
    for (int nt = 1; nt <= int'(POOL); nt++) begin
      rst_n = 1'b0; fetch_enable = 1'b0;
      load_program(nt);
      repeat (3) @(posedge clk);
      rst_n = 1'b1;
      @(posedge clk); fetch_enable = 1'b1;
      repeat (200) @(posedge clk);
      r0 = retired;
      repeat (WINDOW) @(posedge clk);
      ipc = real'(retired - r0) / real'(WINDOW);
      model = (nt >= 3) ? 1.0 : (nt == 2) ? real'(K) / real'(K + 1)
                                          : real'(K) / real'(2 * (K + 1));
      paper = ((nt >= 3) ? MIPS_3 : (nt == 2) ? MIPS_2 : MIPS_1) * CYCLE_NS * 1.0e-3;
      $display("pool %0d, %0d thread(s): %0d instructions in %0d cycles, IPC %0.4f (interleaving model %0.4f, published %0.4f: %0.2f MIPS at %0.1f ns vs %0.2f)",
               POOL, nt, retired - r0, WINDOW, ipc, model, paper, ipc * 1000.0 / CYCLE_NS,
               CYCLE_NS, paper * 1000.0 / CYCLE_NS);
      checks++;
      if (ipc < model - 0.005 || ipc > model + 0.005) begin
        failures++; $display("FAIL %0d threads: IPC %0.4f, expected %0.4f", nt, ipc, model);
      end
      checks++;
      if (ipc < paper * 0.98 || ipc > paper * 1.02) begin
        failures++; $display("FAIL %0d threads: IPC %0.4f, paper %0.4f", nt, ipc, paper);
      end
    end
    done_o = 1'b1;
  end
endmodule
