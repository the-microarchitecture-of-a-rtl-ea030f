// tb_flush_logic: random redirect / fetch / ID-slot traffic for three threads.
// In this core a granted fetch always enters the ID slot at the next edge
// (fetches only start when the ID slot is reloaded). A scoreboard tracks
// whether the instruction in ID belongs to a thread that was redirected in or
// after the cycle it was fetched; such an
// instruction must be flagged by flush_instruction_ID when it sits in ID, and
// no other instruction may be flagged.
module tb_flush_logic;
  import klessydra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic  redirect, fetch, slot_ID, id_load;
  harc_t harc_IE, harc_IF, harc_ID;
  logic  f_IF, f_ID;
  int checks = 0, failures = 0, flushed = 0;

  flush_logic dut (.clk_i(clk), .rst_ni(rst_n), .redirect_i(redirect), .harc_IE_i(harc_IE),
    .fetch_IF_i(fetch), .harc_IF_i(harc_IF), .slot_ID_i(slot_ID), .harc_ID_i(harc_ID),
    .id_load_i(id_load), .flush_instruction_IF_o(f_IF), .flush_instruction_ID_o(f_ID));

  // scoreboard: the instruction in ID and its "stale" flag
  logic id_full, id_stale;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {redirect, fetch, slot_ID, id_load} = '0;
    harc_IE = 0; harc_IF = 0; harc_ID = 0;
    {id_full, id_stale} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // stimulus consistent with the pipeline: the ID slot is what the
      // scoreboard says; a fetch may only start when the ID slot is reloaded
      slot_ID  = id_full;
      id_load  = ($urandom % 3) != 0;
      fetch    = id_load && ($urandom % 2);
      harc_IF  = harc_t'($urandom % 3);
      redirect = ($urandom % 5) == 0;
      harc_IE  = harc_t'($urandom % 3);
      #1;
      if (slot_ID) begin
        checks++;
        if (f_ID != (id_stale || (redirect && harc_ID == harc_IE))) begin
          failures++;
          $display("FAIL cycle %0d: flush_ID=%0d stale=%0d", i, f_ID, id_stale);
        end
        if (f_ID) flushed++;
      end
      // update scoreboard at the clock edge
      @(posedge clk);
      if (id_load) begin
        id_full  = fetch;
        harc_ID  = harc_IF;
        id_stale = fetch && redirect && harc_IF == harc_IE;
      end else if (id_full) begin
        id_stale = id_stale || (redirect && harc_ID == harc_IE);
      end
    end
    $display("flushed=%0d", flushed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
