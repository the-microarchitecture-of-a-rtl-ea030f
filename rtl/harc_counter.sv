// harc_counter: hardware-thread counter that interleaves the threads in fetch.
//
// Every fetch slot it names the thread (harc_IF) whose program counter is sent
// to the program memory. Threads are served round robin; a thread that is not
// active (sleeping in WFI until an interrupt) is skipped. When fewer threads are
// active than THREAD_POOL_BASELINE, the next thread may have issued one of the
// last THREAD_POOL_BASELINE-1 slots; the slot is then a void slot (void_IF=1):
// nothing is fetched and the pipeline carries a NOP. This keeps at least
// THREAD_POOL_BASELINE-1 slots between two instructions of one thread, which is
// what the register file needs with no forwarding and no interlocks.
//
// Interface: harc_IF / void_IF are combinational from the state; the state
// moves when `advance` is high (the fetch stage consumed the slot, either by a
// granted fetch or by a void slot). harc_IF is only meaningful when void_IF=0.
// Follows the paper: round-robin interleaving, skipping of inactive threads,
// NOP insertion below the baseline. Own choice: the issue history used to
// decide where a NOP goes, and the round-robin order.
module harc_counter
  import klessydra_pkg::*;
#(
  parameter int unsigned THREAD_POOL_SIZE     = 3,
  parameter int unsigned THREAD_POOL_BASELINE = 2
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        advance_i,
  input  logic [THREAD_POOL_SIZE-1:0] thread_active_i,
  output harc_t                       harc_IF_o,
  output logic                        void_IF_o
);
  localparam int unsigned HIST = (THREAD_POOL_BASELINE > 1) ? THREAD_POOL_BASELINE - 1 : 1;

  harc_t last_q;                      // last thread that issued
  harc_t hist_harc_q [HIST];          // issuing thread of the last HIST slots
  logic  hist_vld_q  [HIST];          // slot carried a real instruction

  harc_t cand;
  logic  cand_found;
  logic  recent;

  // next active thread after last_q, round robin
  always_comb begin
    cand       = '0;
    cand_found = 1'b0;
    for (int unsigned k = 1; k <= THREAD_POOL_SIZE; k++) begin
      int unsigned t;
      t = (32'(last_q) + k) % THREAD_POOL_SIZE;
      if (!cand_found && thread_active_i[t]) begin
        cand       = harc_t'(t);
        cand_found = 1'b1;
      end
    end
  end

  always_comb begin
    recent = 1'b0;
    if (THREAD_POOL_BASELINE > 1)
      for (int unsigned i = 0; i < HIST; i++)
        if (hist_vld_q[i] && hist_harc_q[i] == cand) recent = 1'b1;
  end

  assign void_IF_o = !cand_found || recent;
  assign harc_IF_o = cand;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_q <= harc_t'(THREAD_POOL_SIZE - 1);   // thread 0 issues first
      for (int unsigned i = 0; i < HIST; i++) begin
        hist_harc_q[i] <= '0;
        hist_vld_q[i]  <= 1'b0;
      end
    end else if (advance_i) begin
      if (!void_IF_o) last_q <= cand;
      hist_harc_q[0] <= cand;
      hist_vld_q[0]  <= !void_IF_o;
      for (int unsigned i = 1; i < HIST; i++) begin
        hist_harc_q[i] <= hist_harc_q[i-1];
        hist_vld_q[i]  <= hist_vld_q[i-1];
      end
    end
  end

`ifndef SYNTHESIS
  initial assert (THREAD_POOL_SIZE >= 1 && THREAD_POOL_SIZE <= 2**HARC_W)
    else $error("THREAD_POOL_SIZE out of range");
  initial assert (THREAD_POOL_BASELINE >= 2)
    else $error("the three-stage pipeline needs THREAD_POOL_BASELINE >= 2");
`endif
endmodule
