// fsm_IF: instruction fetch stage and the IF/ID pipeline register.
//
// The stage sends the program counter of the thread chosen by the harc counter
// to the program memory over the Pulpino instruction port (instr_req_o /
// instr_gnt_i / instr_rvalid_i / instr_addr_o / instr_rdata_i). A request is
// issued in a cycle in which the ID slot will be free at the clock edge; with a
// memory that grants at once and answers in the next cycle it fetches one
// instruction per cycle. The word arrives while the request is in the ID slot;
// if the rest of the pipeline is stalled then, the word is kept in a holding
// register. The stage stalls the pipeline (id_ready_o=0) while the ID slot
// waits for a word that has not arrived. There is no prefetch and no
// compressed-instruction support: every address is a 32-bit word address.
// The thread id (harc) and PC travel with the request unchanged; the stage
// itself knows nothing of the threads.
//
// State ("1 comb + 1 state reg"): the ID slot state, one of EMPTY, VOID
// (a void-thread NOP slot), WAIT (granted, word not yet received) and READY.
//
// Interface timing: ie_accept_i (the ID/IE register loads this cycle) is the
// only stall input. id_advance_o = ie_accept_i && id_ready_o moves the slot on
// to fsm_ID. fire_o is high when a request is granted (the thread's PC then
// increments); slot_consumed_o when the harc counter slot is used (granted
// fetch or void slot).
// Follows the paper: one instruction per cycle, word aligned, no prefetch,
// stall on slow program memory, harc passed on as is. Own choice: the holding
// register and the slot states.
module fsm_IF
  import klessydra_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // control
  input  logic        fetch_enable_i,   // core may fetch (running, not halting)
  input  logic        ie_accept_i,      // ID/IE register loads this cycle
  input  harc_t       harc_IF_i,
  input  logic        void_IF_i,
  input  logic [31:0] pc_IF_i,
  // program memory port
  output logic        instr_req_o,
  output logic [31:0] instr_addr_o,
  input  logic        instr_gnt_i,
  input  logic        instr_rvalid_i,
  input  logic [31:0] instr_rdata_i,
  // to harc counter / PC updaters
  output logic        fire_o,
  output logic        slot_consumed_o,
  // IF/ID register towards fsm_ID
  output logic        id_ready_o,       // slot holds nothing still awaited
  output logic        id_advance_o,
  output logic        id_load_o,        // the ID slot takes a new IF slot
  output logic        instr_valid_ID_o, // a real instruction word is in ID
  output logic [31:0] instr_word_ID_o,
  output logic [31:0] pc_ID_o,
  output harc_t       harc_ID_o,
  output logic        busy_o            // ID slot holds a fetched instruction
);
  typedef enum logic [1:0] {S_EMPTY, S_VOID, S_WAIT, S_READY} slot_e;

  slot_e       slot_q, slot_d;
  logic [31:0] pc_q, word_q;
  harc_t       harc_q;
  logic        load_new;

  assign id_ready_o   = (slot_q != S_WAIT) || instr_rvalid_i;
  assign id_advance_o = ie_accept_i && id_ready_o;
  assign load_new     = id_advance_o || (slot_q == S_EMPTY);

  assign instr_req_o     = load_new && fetch_enable_i && !void_IF_i;
  assign instr_addr_o    = {pc_IF_i[31:2], 2'b00};
  assign fire_o          = instr_req_o && instr_gnt_i;
  assign id_load_o       = load_new;
  assign slot_consumed_o = fire_o || (load_new && fetch_enable_i && void_IF_i);

  assign instr_valid_ID_o = (slot_q == S_READY) || (slot_q == S_WAIT && instr_rvalid_i);
  assign instr_word_ID_o  = (slot_q == S_WAIT) ? instr_rdata_i : word_q;
  assign pc_ID_o          = pc_q;
  assign harc_ID_o        = harc_q;
  assign busy_o           = (slot_q == S_WAIT) || (slot_q == S_READY);

  always_comb begin
    slot_d = slot_q;
    if (load_new) begin
      if (fire_o)                               slot_d = S_WAIT;
      else if (fetch_enable_i && void_IF_i)     slot_d = S_VOID;
      else                                      slot_d = S_EMPTY;
    end else if (slot_q == S_WAIT && instr_rvalid_i) begin
      slot_d = S_READY;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      slot_q <= S_EMPTY;
      pc_q   <= '0;
      harc_q <= '0;
      word_q <= '0;
    end else begin
      slot_q <= slot_d;
      if (load_new) begin
        pc_q   <= pc_IF_i;
        harc_q <= harc_IF_i;
      end
      if (slot_q == S_WAIT && instr_rvalid_i && !load_new) word_q <= instr_rdata_i;
    end
  end

`ifndef SYNTHESIS
  // Pulpino port rule: the answer only comes for a granted request.
  a_rvalid_expected: assert property (@(posedge clk_i) disable iff (!rst_ni)
      instr_rvalid_i |-> slot_q == S_WAIT)
    else $error("fsm_IF: instr_rvalid_i without an outstanding request");
`endif
endmodule
