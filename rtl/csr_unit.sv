// csr_unit: control and status registers of one hardware thread and the
// state machine that operates on them.
//
// One instance per thread. It handles three kinds of operation:
//  * CSR instructions (CSRRW/S/C and their immediate forms). The execute stage
//    raises csr_req_i for one cycle with address, operation and operand; the
//    unit moves to its BUSY state, and in the next cycle reads the old value,
//    writes the new one and raises csr_done_o with csr_rdata_o (and
//    csr_illegal_o for an address it does not implement). The execute stage
//    waits in its CSR-wait state for that cycle.
//  * Trap entry (exception or interrupt, trap_i): MEPC <- trap_pc_i,
//    MCAUSE <- trap_cause_i, MESTATUS <- MSTATUS, MSTATUS.MIE <- 0, and for
//    misaligned or faulting accesses MBADADDR <- trap_badaddr_i. For an
//    external interrupt MIRQ <- the interrupt number.
//  * MRET (mret_i): MSTATUS <- MESTATUS.
// Registers (all 32 bits): MSTATUS (only MIE, bit 3, is implemented), MESTATUS,
// MEPC, MCAUSE, MBADADDR, MTVEC, MIP (bit 11 external interrupt, read only and
// driven by irq_i; bit 3 software interrupt, writable), MIRQ, PCER, MHPMEVENT3
// and MHPMCOUNTER3 (one performance counter: it counts the events of its
// thread selected by the MHPMEVENT3 bits while PCER bit 0 is set), and the
// read-only MCPUID, MIMPID, MHARTID.
// irq_pending_o = MSTATUS.MIE and (MIP.MEIP or MIP.MSIP). wake_o = MIP has a
// pending bit whatever MIE says (ends a WFI).
// Follows the paper: the three kinds of operation and its list of CSRs.
// Own choices: the addresses of the non-standard MESTATUS (0x7C0) and MIRQ
// (0xFC0), the use of MESTATUS as the saved MSTATUS, the single counter and
// its event encoding (bit 0 cycles, 1 retired instructions, 2 loads/stores,
// 3 taken branches, 4 ext_perf_counter_i), MTVEC reset = boot address + 0x80,
// and the MHARTID layout {cluster id, core id, thread id}.
module csr_unit
  import klessydra_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] boot_addr_i,
  input  logic [31:0] hartid_i,
  // CSR instruction
  input  logic        csr_req_i,
  input  csr_op_e     csr_op_i,
  input  logic [11:0] csr_addr_i,
  input  logic [31:0] csr_wdata_i,
  output logic        csr_done_o,
  output logic [31:0] csr_rdata_o,
  output logic        csr_illegal_o,
  // traps
  input  logic        trap_i,
  input  logic [31:0] trap_cause_i,
  input  logic [31:0] trap_pc_i,
  input  logic        trap_badaddr_we_i,
  input  logic [31:0] trap_badaddr_i,
  input  logic        mret_i,
  // interrupts
  input  logic        ext_irq_i,
  input  logic [4:0]  irq_id_i,
  output logic        irq_pending_o,
  output logic        irq_is_ext_o,
  output logic        wake_o,
  // events for the performance counter
  input  logic        ev_retire_i,
  input  logic        ev_ldst_i,
  input  logic        ev_branch_i,
  input  logic        ev_ext_i,
  // values used by the PC updater
  output logic [31:0] mepc_o,
  output logic [31:0] mtvec_o
);
  typedef enum logic {CSR_IDLE, CSR_BUSY} csr_state_e;

  csr_state_e  state_q;
  csr_op_e     op_q;
  logic [11:0] addr_q;
  logic [31:0] wdata_q;

  logic        mie_q, msip_q, mestatus_mie_q;
  logic [31:0] mepc_q, mcause_q, mbadaddr_q, mtvec_q, pcer_q, mhpmevent_q, mhpmcounter_q;
  logic [4:0]  mirq_q;

  logic [31:0] mstatus, mestatus, mip;
  logic [31:0] old_val, new_val;
  logic        known;
  logic        events;

  assign mstatus  = 32'(mie_q) << MSTATUS_MIE;
  assign mestatus = 32'(mestatus_mie_q) << MSTATUS_MIE;
  assign mip      = (32'(ext_irq_i) << MIP_MEIP) | (32'(msip_q) << MIP_MSIP);

  always_comb begin
    known = 1'b1;
    unique case (addr_q)
      CSR_MSTATUS:      old_val = mstatus;
      CSR_MESTATUS:     old_val = mestatus;
      CSR_MEPC:         old_val = mepc_q;
      CSR_MCAUSE:       old_val = mcause_q;
      CSR_MBADADDR:     old_val = mbadaddr_q;
      CSR_MTVEC:        old_val = mtvec_q;
      CSR_MIP:          old_val = mip;
      CSR_MIRQ:         old_val = 32'(mirq_q);
      CSR_PCER:         old_val = pcer_q;
      CSR_MHPMEVENT3:   old_val = mhpmevent_q;
      CSR_MHPMCOUNTER3: old_val = mhpmcounter_q;
      CSR_MCPUID:       old_val = MCPUID_VALUE;
      CSR_MIMPID:       old_val = MIMPID_VALUE;
      CSR_MHARTID:      old_val = hartid_i;
      default: begin    old_val = '0; known = 1'b0; end
    endcase
    unique case (op_q)
      CSR_OP_W: new_val = wdata_q;
      CSR_OP_S: new_val = old_val | wdata_q;
      CSR_OP_C: new_val = old_val & ~wdata_q;
      default:  new_val = old_val;
    endcase
  end

  assign csr_done_o    = (state_q == CSR_BUSY);
  assign csr_rdata_o   = old_val;
  assign csr_illegal_o = (state_q == CSR_BUSY) && !known;

  assign irq_is_ext_o  = ext_irq_i;
  assign irq_pending_o = mie_q && (ext_irq_i || msip_q);
  assign wake_o        = ext_irq_i || msip_q;
  assign mepc_o        = mepc_q;
  assign mtvec_o       = mtvec_q;

  assign events = (mhpmevent_q[0]) ||
                  (mhpmevent_q[1] && ev_retire_i) ||
                  (mhpmevent_q[2] && ev_ldst_i) ||
                  (mhpmevent_q[3] && ev_branch_i) ||
                  (mhpmevent_q[4] && ev_ext_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q        <= CSR_IDLE;
      op_q           <= CSR_OP_W;
      addr_q         <= '0;
      wdata_q        <= '0;
      mie_q          <= 1'b0;
      mestatus_mie_q <= 1'b0;
      msip_q         <= 1'b0;
      mepc_q         <= '0;
      mcause_q       <= '0;
      mbadaddr_q     <= '0;
      mtvec_q        <= boot_addr_i + MTVEC_RESET_OFFSET;
      pcer_q         <= '0;
      mhpmevent_q    <= '0;
      mhpmcounter_q  <= '0;
      mirq_q         <= '0;
    end else begin
      // performance counter (a CSR write below takes precedence)
      if (pcer_q[0] && events) mhpmcounter_q <= mhpmcounter_q + 32'd1;

      unique case (state_q)
        CSR_IDLE: if (csr_req_i) begin
          state_q <= CSR_BUSY;
          op_q    <= csr_op_i;
          addr_q  <= csr_addr_i;
          wdata_q <= csr_wdata_i;
        end
        CSR_BUSY: begin
          state_q <= CSR_IDLE;
          // CSRRS/CSRRC with a zero operand do not write (RISC-V rule)
          if (op_q == CSR_OP_W || wdata_q != '0) begin
            unique case (addr_q)
              CSR_MSTATUS:      mie_q          <= new_val[MSTATUS_MIE];
              CSR_MESTATUS:     mestatus_mie_q <= new_val[MSTATUS_MIE];
              CSR_MEPC:         mepc_q         <= {new_val[31:2], 2'b00};
              CSR_MCAUSE:       mcause_q       <= new_val;
              CSR_MBADADDR:     mbadaddr_q     <= new_val;
              CSR_MTVEC:        mtvec_q        <= {new_val[31:2], 2'b00};
              CSR_MIP:          msip_q         <= new_val[MIP_MSIP];
              CSR_PCER:         pcer_q         <= new_val;
              CSR_MHPMEVENT3:   mhpmevent_q    <= new_val;
              CSR_MHPMCOUNTER3: mhpmcounter_q  <= new_val;
              default: ;
            endcase
          end
        end
        default: state_q <= CSR_IDLE;
      endcase

      if (trap_i) begin
        mepc_q         <= trap_pc_i;
        mcause_q       <= trap_cause_i;
        mestatus_mie_q <= mie_q;
        mie_q          <= 1'b0;
        if (trap_badaddr_we_i) mbadaddr_q <= trap_badaddr_i;
        if (trap_cause_i == CAUSE_IRQ_EXT) mirq_q <= irq_id_i;
      end else if (mret_i) begin
        mie_q <= mestatus_mie_q;
      end
    end
  end

`ifndef SYNTHESIS
  a_no_overlap: assert property (@(posedge clk_i) disable iff (!rst_ni)
      !(csr_req_i && (trap_i || mret_i)))
    else $error("csr_unit: CSR instruction and trap in the same cycle");
`endif
endmodule
