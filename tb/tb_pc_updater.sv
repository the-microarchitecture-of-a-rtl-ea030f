// tb_pc_updater: drives random event combinations into one pc_updater and
// compares the PC with a reference model of the priority
// reset > exception/interrupt (MTVEC) > MRET (MEPC) > branch > fetch (+4).
module tb_pc_updater;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fetch, br, exc, irq, mret;
  logic [31:0] tgt, mtvec, mepc, pc, ref_pc;
  logic pend;
  int checks = 0, failures = 0;

  pc_updater dut (.clk_i(clk), .rst_ni(rst_n), .boot_addr_i(32'h0000_1000),
    .fetch_i(fetch), .set_branch_condition_i(br), .branch_target_i(tgt),
    .set_except_condition_i(exc), .served_irq_i(irq), .set_mret_condition_i(mret),
    .mtvec_i(mtvec), .mepc_i(mepc), .pc_o(pc), .branch_condition_pending_o(pend));

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {fetch, br, exc, irq, mret} = '0;
    tgt = 0; mtvec = 32'h80; mepc = 32'h300;
    repeat (2) @(posedge clk);
    checks++; if (pc != 32'h1000) begin failures++; $display("FAIL boot pc %h", pc); end
    rst_n = 1;
    ref_pc = 32'h1000;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      fetch = $urandom % 2;
      br    = ($urandom % 4) == 0;
      exc   = ($urandom % 10) == 0;
      irq   = ($urandom % 10) == 0;
      mret  = ($urandom % 8) == 0;
      tgt   = $urandom & ~32'h3;
      mtvec = 32'h80 + 4 * ($urandom % 4);
      mepc  = $urandom & ~32'h3;
      #1;
      checks++;
      if (pend != (fetch && (br || exc || irq || mret))) begin
        failures++; $display("FAIL pending flag");
      end
      if (exc || irq) ref_pc = mtvec;
      else if (mret)  ref_pc = mepc;
      else if (br)    ref_pc = tgt;
      else if (fetch) ref_pc = ref_pc + 4;
      @(posedge clk); #1;
      checks++;
      if (pc != ref_pc) begin
        failures++; $display("FAIL step %0d: pc %h expected %h", i, pc, ref_pc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
