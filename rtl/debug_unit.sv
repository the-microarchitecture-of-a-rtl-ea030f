// debug_unit: Pulpino-compatible debug port of the core.
//
// The debug unit can take control of execution after an external halt
// request (debug_halt_i, or a write of DBG_CTRL.HALT) or after the core
// executes EBREAK. It then asks the core to halt (halt_req_o): fetching
// stops, the instructions already fetched complete, and the execute stage
// enters its DEBUG state (halted_i, reported on debug_halted_o). While halted,
// the register files of all threads and the debug registers are accessible.
// Two modes:
//   halt mode        - the core stays halted until debug_resume_i or a write
//                      of DBG_CTRL with HALT = 0;
//   single-step mode - with DBG_CTRL.SSTE = 1, each resume lets exactly one
//                      instruction be fetched and executed, then the core
//                      halts again and DBG_HIT.SSTH is set.
// Register map (debug_addr_i, byte addresses, 15 bits):
//   0x0000 DBG_CTRL   bit 16 HALT (r/w), bit 0 SSTE (r/w)
//   0x0004 DBG_HIT    bit 0 SSTH (sticky, write 0 to clear)
//   0x000C DBG_CAUSE  3 = EBREAK, 0x1F = halt request (read only)
//   0x0400 + 0x80*t + 4*r : register x<r> of thread t (r/w while halted)
//   0x2000 + 4*t          : next PC of thread t (read only)
// Port protocol: debug_gnt_o is given in the cycle of debug_req_i, and a read
// answers with debug_rvalid_o / debug_rdata_o in the next cycle.
// Follows the paper: the two modes, halting after the last fetched
// instruction, EBREAK entry, register-file access in the debug state, Pulpino
// pin set. Own choice: the register map, which is modelled on Pulpino's but
// reduced to these registers, with one register-file window per thread.
module debug_unit
  import klessydra_pkg::*;
#(
  parameter int unsigned THREAD_POOL_SIZE = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // Pulpino debug port
  input  logic        debug_req_i,
  output logic        debug_gnt_o,
  output logic        debug_rvalid_o,
  input  logic [14:0] debug_addr_i,
  input  logic        debug_we_i,
  input  logic [31:0] debug_wdata_i,
  output logic [31:0] debug_rdata_o,
  input  logic        debug_halt_i,
  input  logic        debug_resume_i,
  output logic        debug_halted_o,
  // core side
  input  logic        ebreak_i,
  input  logic        halted_i,        // execute stage is in its DEBUG state
  input  logic        fetch_i,         // an instruction fetch was granted
  output logic        halt_req_o,      // stop fetching, drain, halt
  output logic        fetch_allow_o,
  input  logic [31:0] pc_i [THREAD_POOL_SIZE],
  // register file port
  output harc_t       rf_harc_o,
  output logic [4:0]  rf_addr_o,
  output logic        rf_we_o,
  output logic [31:0] rf_wdata_o,
  input  logic [31:0] rf_rdata_i
);
  // thread-id bits needed to index the per-thread arrays
  localparam int unsigned IDX_W = (THREAD_POOL_SIZE > 1) ? $clog2(THREAD_POOL_SIZE) : 1;
  logic        halt_q, sste_q, ssth_q, step_q, stepping_q;
  logic [4:0]  cause_q;
  logic [31:0] rdata_q;
  logic        rvalid_q;
  logic        is_gpr, is_npc, wr, resume;
  logic [31:0] rdata_d;
  harc_t       npc_harc;

  assign debug_gnt_o = debug_req_i;
  assign wr          = debug_req_i && debug_we_i;
  assign is_gpr      = debug_addr_i[14:10] == 5'b00001 && debug_addr_i[9] == 1'b0;
  assign is_npc      = debug_addr_i[14:8] == 7'h20;
  assign npc_harc    = harc_t'(debug_addr_i[7:2]);

  assign rf_harc_o  = harc_t'(debug_addr_i[8:7]);
  assign rf_addr_o  = debug_addr_i[6:2];
  assign rf_we_o    = wr && is_gpr && halted_i;
  assign rf_wdata_o = debug_wdata_i;

  // resume: pin, or DBG_CTRL written with HALT = 0
  assign resume = halt_q && (debug_resume_i ||
                  (wr && debug_addr_i == 15'h0000 && !debug_wdata_i[16]));

  always_comb begin
    rdata_d = '0;
    if (is_gpr)                             rdata_d = rf_rdata_i;
    else if (is_npc) begin
      if (32'(npc_harc) < THREAD_POOL_SIZE) rdata_d = pc_i[npc_harc[IDX_W-1:0]];
    end
    else unique case (debug_addr_i)
      15'h0000: rdata_d = {15'b0, halt_q, 15'b0, sste_q};
      15'h0004: rdata_d = {31'b0, ssth_q};
      15'h000C: rdata_d = {27'b0, cause_q};
      default:  rdata_d = '0;
    endcase
  end

  // A single step is a token for one fetch; it is spent on the fetch and the
  // core drains and halts again.
  assign halt_req_o     = halt_q && !step_q;
  assign fetch_allow_o  = !halt_q || step_q;
  assign debug_halted_o = halted_i;
  assign debug_rvalid_o = rvalid_q;
  assign debug_rdata_o  = rdata_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      halt_q     <= 1'b0;
      sste_q     <= 1'b0;
      ssth_q     <= 1'b0;
      step_q     <= 1'b0;
      stepping_q <= 1'b0;
      cause_q    <= '0;
      rdata_q    <= '0;
      rvalid_q   <= 1'b0;
    end else begin
      rvalid_q <= debug_req_i && !debug_we_i;
      if (debug_req_i && !debug_we_i) rdata_q <= rdata_d;

      if (wr && debug_addr_i == 15'h0000) sste_q <= debug_wdata_i[0];
      if (wr && debug_addr_i == 15'h0004) ssth_q <= debug_wdata_i[0];

      if (ebreak_i) begin
        halt_q  <= 1'b1;
        cause_q <= 5'd3;
      end else if (!halt_q && (debug_halt_i ||
                   (wr && debug_addr_i == 15'h0000 && debug_wdata_i[16]))) begin
        halt_q  <= 1'b1;
        cause_q <= 5'h1F;
      end else if (resume) begin
        if ((wr && debug_addr_i == 15'h0000) ? debug_wdata_i[0] : sste_q) begin
          step_q     <= 1'b1;      // stay in halt mode, allow one instruction
          stepping_q <= 1'b1;
        end else begin
          halt_q <= 1'b0;
        end
      end

      if (step_q && fetch_i) step_q <= 1'b0;
      if (stepping_q && !step_q && halted_i) begin
        stepping_q <= 1'b0;
        ssth_q     <= 1'b1;
      end
    end
  end
endmodule
