// pc_updater: program counter of one hardware thread and its update logic.
//
// One instance per thread holds that thread's next fetch address (the PC0, PC1,
// ... registers of the scheme); the fetch stage reads it through the PC mux.
// Each cycle the register takes, in priority order:
//   reset (rst_ni)                        -> boot_addr_i
//   exception or interrupt taken          -> mtvec_i
//   MRET                                  -> mepc_i
//   taken branch / jump                   -> branch_target_i
//   this thread fetched (fetch_i)         -> pc + 4
// and otherwise keeps its value. Redirects come from the execute stage in the
// cycle the redirecting instruction completes; they win over the +4 of a fetch
// of the same thread in that cycle, whose instruction the flush logic discards.
// The boot address is sampled while reset is low.
// Follows the paper: the event list (branch, exception, MRET, interrupt, boot)
// and the default +4. Own choice: the priority order. Because a redirect is
// applied in the cycle it is raised, a "branch pending" state is never needed:
// branch_condition_pending_o only reports, for observation, that a redirect
// is being applied while the thread is also being fetched.
module pc_updater (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] boot_addr_i,
  input  logic        fetch_i,
  input  logic        set_branch_condition_i,
  input  logic [31:0] branch_target_i,
  input  logic        set_except_condition_i,
  input  logic        served_irq_i,
  input  logic        set_mret_condition_i,
  input  logic [31:0] mtvec_i,
  input  logic [31:0] mepc_i,
  output logic [31:0] pc_o,
  output logic        branch_condition_pending_o
);
  logic [31:0] pc_q, pc_d;

  always_comb begin
    pc_d = pc_q;
    if (set_except_condition_i || served_irq_i) pc_d = mtvec_i;
    else if (set_mret_condition_i)              pc_d = mepc_i;
    else if (set_branch_condition_i)            pc_d = branch_target_i;
    else if (fetch_i)                           pc_d = pc_q + 32'd4;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) pc_q <= boot_addr_i;
    else         pc_q <= pc_d;
  end

  assign pc_o = pc_q;
  assign branch_condition_pending_o = fetch_i &&
      (set_branch_condition_i || set_except_condition_i || served_irq_i || set_mret_condition_i);
endmodule
