// flush_logic: discards instructions fetched after a redirect of their thread.
//
// When the execute stage redirects a thread (taken branch, jump, trap, MRET,
// interrupt, EBREAK, WFI), the instructions of that same thread already in
// the fetch stage (IF) or in the decode slot (ID) were fetched from the old,
// sequential PC and must not execute. With enough threads in the pool they
// never exist and nothing is flushed; with fewer threads this is the one
// lost cycle per taken branch.
//   flush_instruction_IF     = redirect of the thread being fetched right now
//   flush_instr_previous_IF  = flush_instruction_IF registered when the fetched
//                              slot moves into ID; kept while ID stalls
//   flush_instruction_ID     = flush_instr_previous_IF, or a redirect of the
//                              thread whose instruction sits in ID now
// fsm_ID turns an instruction with flush_instruction_ID into a bubble.
// Follows the paper: the three signal names of the scheme and the rule that
// only instructions of the branching thread are flushed. Own choice: combining
// the registered and the direct term so that either one flushes.
module flush_logic
  import klessydra_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  redirect_i,        // execute stage redirects thread harc_IE_i
  input  harc_t harc_IE_i,
  input  logic  fetch_IF_i,        // a fetch is granted in IF this cycle
  input  harc_t harc_IF_i,
  input  logic  slot_ID_i,         // ID slot holds a fetched instruction
  input  harc_t harc_ID_i,
  input  logic  id_load_i,         // the IF slot moves into ID this cycle
  output logic  flush_instruction_IF_o,
  output logic  flush_instruction_ID_o
);
  logic flush_instr_previous_IF_q;

  assign flush_instruction_IF_o = redirect_i && fetch_IF_i && (harc_IF_i == harc_IE_i);
  assign flush_instruction_ID_o = flush_instr_previous_IF_q ||
                                  (redirect_i && slot_ID_i && (harc_ID_i == harc_IE_i));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)           flush_instr_previous_IF_q <= 1'b0;
    else if (id_load_i)    flush_instr_previous_IF_q <= flush_instruction_IF_o;
    else                   flush_instr_previous_IF_q <= flush_instruction_ID_o && slot_ID_i;
  end
endmodule
