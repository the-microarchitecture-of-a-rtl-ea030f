// tb_csr_unit: one per-thread CSR unit against a reference model.
// Random CSRRW/CSRRS/CSRRC requests to every implemented CSR and to unknown
// addresses, mixed with traps (exceptions and interrupts) and MRETs. Each
// request must finish in its second cycle with the old CSR value (or illegal
// for an unknown address), and the model state must match after every step.
// Then the performance counter is checked: counting cycles when enabled,
// counting only selected events, and not counting when PCER is clear.
module tb_csr_unit;
  import klessydra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam logic [31:0] BOOT = 32'h0000_2000, HART = 32'h0000_0402;

  logic        req = 0, done, illegal, trap = 0, bwe = 0, mret = 0, ext = 0;
  csr_op_e     op = CSR_OP_W;
  logic [11:0] addr = 0;
  logic [31:0] wdata = 0, rdata, cause = 0, tpc = 0, badaddr = 0, mepc, mtvec;
  logic [4:0]  irq_id = 0;
  logic        pend, is_ext, wake;
  logic        ev_ret = 0, ev_ls = 0, ev_br = 0, ev_ext = 0;
  int checks = 0, failures = 0;

  csr_unit dut (.clk_i(clk), .rst_ni(rst_n), .boot_addr_i(BOOT), .hartid_i(HART),
    .csr_req_i(req), .csr_op_i(op), .csr_addr_i(addr), .csr_wdata_i(wdata),
    .csr_done_o(done), .csr_rdata_o(rdata), .csr_illegal_o(illegal),
    .trap_i(trap), .trap_cause_i(cause), .trap_pc_i(tpc), .trap_badaddr_we_i(bwe),
    .trap_badaddr_i(badaddr), .mret_i(mret), .ext_irq_i(ext), .irq_id_i(irq_id),
    .irq_pending_o(pend), .irq_is_ext_o(is_ext), .wake_o(wake),
    .ev_retire_i(ev_ret), .ev_ldst_i(ev_ls), .ev_branch_i(ev_br), .ev_ext_i(ev_ext),
    .mepc_o(mepc), .mtvec_o(mtvec));

  // reference model
  logic m_mie, m_emie, m_msip;
  logic [31:0] m_mepc, m_mcause, m_mbad, m_mtvec, m_pcer, m_event, m_cnt;
  logic [4:0] m_mirq;

  function automatic logic m_read(logic [11:0] a, output logic [31:0] v);
    m_read = 1;
    case (a)
      CSR_MSTATUS:      v = 32'(m_mie) << MSTATUS_MIE;
      CSR_MESTATUS:     v = 32'(m_emie) << MSTATUS_MIE;
      CSR_MEPC:         v = m_mepc;
      CSR_MCAUSE:       v = m_mcause;
      CSR_MBADADDR:     v = m_mbad;
      CSR_MTVEC:        v = m_mtvec;
      CSR_MIP:          v = (32'(ext) << MIP_MEIP) | (32'(m_msip) << MIP_MSIP);
      CSR_MIRQ:         v = 32'(m_mirq);
      CSR_PCER:         v = m_pcer;
      CSR_MHPMEVENT3:   v = m_event;
      CSR_MHPMCOUNTER3: v = m_cnt;
      CSR_MCPUID:       v = 32'h101;
      CSR_MIMPID:       v = 32'h23;
      CSR_MHARTID:      v = HART;
      default: begin v = 0; m_read = 0; end
    endcase
  endfunction

  task automatic m_write(logic [11:0] a, logic [31:0] v);
    case (a)
      CSR_MSTATUS:      m_mie  = v[MSTATUS_MIE];
      CSR_MESTATUS:     m_emie = v[MSTATUS_MIE];
      CSR_MEPC:         m_mepc = v & ~32'h3;
      CSR_MCAUSE:       m_mcause = v;
      CSR_MBADADDR:     m_mbad = v;
      CSR_MTVEC:        m_mtvec = v & ~32'h3;
      CSR_MIP:          m_msip = v[MIP_MSIP];
      CSR_PCER:         m_pcer = v;
      CSR_MHPMEVENT3:   m_event = v;
      CSR_MHPMCOUNTER3: m_cnt = v;
      default: ;
    endcase
  endtask

  task automatic chk(string n, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", n, got, exp); end
  endtask

  // one CSR instruction: request, read the old value in the done cycle,
  // then one more cycle for the write to land
  task automatic csr(csr_op_e o, logic [11:0] a, logic [31:0] d, output logic [31:0] r);
    op = o; addr = a; wdata = d; req = 1;
    @(negedge clk); req = 0; #1;
    r = rdata;
    @(negedge clk);
  endtask

  localparam logic [11:0] ADDRS [16] = '{CSR_MSTATUS, CSR_MESTATUS, CSR_MEPC, CSR_MCAUSE,
    CSR_MBADADDR, CSR_MTVEC, CSR_MIP, CSR_MIRQ, CSR_PCER, CSR_MHPMEVENT3, CSR_MHPMCOUNTER3,
    CSR_MCPUID, CSR_MIMPID, CSR_MHARTID, 12'h123, 12'h7FF};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v, old;
    logic known;
    int n0;
    m_mie = 0; m_emie = 0; m_msip = 0; m_mepc = 0; m_mcause = 0; m_mbad = 0;
    m_mtvec = BOOT + 32'h80; m_pcer = 0; m_event = 0; m_cnt = 0; m_mirq = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk("mtvec after reset", mtvec, BOOT + 32'h80);
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      ext = ($urandom % 4) == 0;
      #1;
      chk("irq_pending", 32'(pend), 32'(m_mie && (ext || m_msip)));
      chk("wake", 32'(wake), 32'(ext || m_msip));
      chk("mepc", mepc, m_mepc);
      chk("mtvec", mtvec, m_mtvec);
      case ($urandom % 6)
        0, 1, 2, 3: begin   // CSR instruction
          addr  = ADDRS[$urandom % 16];
          op    = csr_op_e'($urandom % 3);
          wdata = ($urandom % 3 == 0) ? 32'h0 : (($urandom % 2) ? 32'h8 : $urandom);
          // keep the counter off in this phase
          if (addr == CSR_PCER) wdata = 0;
          req = 1;
          @(negedge clk); req = 0;
          #1;
          known = m_read(addr, old);
          chk("done", 32'(done), 1);
          chk("illegal", 32'(illegal), 32'(!known));
          if (known) chk($sformatf("read %h", addr), rdata, old);
          if (op == CSR_OP_W) v = wdata;
          else if (op == CSR_OP_S) v = old | wdata;
          else v = old & ~wdata;
          if (op == CSR_OP_W || wdata != 0) m_write(addr, v);
        end
        4: begin            // trap
          trap = 1;
          cause = ($urandom % 2) ? CAUSE_IRQ_EXT : 32'($urandom % 12);
          tpc = $urandom & ~32'h3; bwe = $urandom % 2; badaddr = $urandom;
          irq_id = 5'($urandom);
          m_mepc = tpc; m_mcause = cause; m_emie = m_mie; m_mie = 0;
          if (bwe) m_mbad = badaddr;
          if (cause == CAUSE_IRQ_EXT) m_mirq = irq_id;
          @(negedge clk); trap = 0; bwe = 0;
        end
        default: begin      // mret
          mret = 1;
          m_mie = m_emie;
          @(negedge clk); mret = 0;
        end
      endcase
    end
    // performance counter
    @(negedge clk); ext = 0;
    csr(CSR_OP_W, CSR_MHPMCOUNTER3, 0, v);
    csr(CSR_OP_W, CSR_MHPMEVENT3, 32'h1, v);
    csr(CSR_OP_W, CSR_PCER, 32'h1, v);
    csr(CSR_OP_S, CSR_MHPMCOUNTER3, 0, v);
    n0 = int'(v);
    repeat (10) @(negedge clk);
    csr(CSR_OP_S, CSR_MHPMCOUNTER3, 0, v);
    chk("cycle count over 12 cycles", v - 32'(n0), 12);
    // count only retire events: 7 retires
    csr(CSR_OP_W, CSR_MHPMEVENT3, 32'h2, v);
    csr(CSR_OP_W, CSR_MHPMCOUNTER3, 0, v);
    for (int k = 0; k < 20; k++) begin
      ev_ret = (k % 3) == 0; ev_ls = 1; ev_br = 1; @(negedge clk);
    end
    ev_ret = 0; ev_ls = 0; ev_br = 0;
    csr(CSR_OP_S, CSR_MHPMCOUNTER3, 0, v);
    chk("retire count", v, 7);
    // disabled: nothing counted
    csr(CSR_OP_W, CSR_PCER, 0, v);
    csr(CSR_OP_S, CSR_MHPMCOUNTER3, 0, v);
    n0 = int'(v);
    repeat (5) begin ev_ret = 1; @(negedge clk); end
    ev_ret = 0;
    csr(CSR_OP_S, CSR_MHPMCOUNTER3, 0, v);
    chk("count when disabled", v, 32'(n0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
