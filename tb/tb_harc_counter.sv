// tb_harc_counter: checks the thread interleaving of harc_counter (T023:
// pool size 3, baseline 2). For several active-thread masks it records the
// issue sequence and compares it with the expected round-robin order with
// void slots, and checks the spacing rule: two issues of one thread are never
// in adjacent slots.
module tb_harc_counter;
  import klessydra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       advance = 1'b0;
  logic [2:0] active = 3'b111;
  harc_t      harc;
  logic       void_s;
  int checks = 0, failures = 0;

  harc_counter #(.THREAD_POOL_SIZE(3), .THREAD_POOL_BASELINE(2)) dut (
    .clk_i(clk), .rst_ni(rst_n), .advance_i(advance), .thread_active_i(active),
    .harc_IF_o(harc), .void_IF_o(void_s));

  // -1 = void slot
  task automatic run(logic [2:0] mask, int n, int exp[$], string name);
    int got[$];
    // restart from reset so every sequence begins with the same history
    @(negedge clk); rst_n = 0; active = mask;
    @(negedge clk); rst_n = 1; advance = 1;
    for (int i = 0; i < n; i++) begin
      got.push_back(void_s ? -1 : int'(harc));
      @(negedge clk);
    end
    advance = 0;
    for (int i = 0; i < n; i++) begin
      checks++;
      if (got[i] != exp[i]) begin
        failures++;
        $display("FAIL %s slot %0d: got %0d expected %0d", name, i, got[i], exp[i]);
      end
    end
    for (int i = 1; i < n; i++) begin
      checks++;
      if (got[i] != -1 && got[i] == got[i-1]) begin
        failures++; $display("FAIL %s: thread %0d in adjacent slots", name, got[i]);
      end
    end
  endtask

  initial begin
    repeat (50) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(3'b111, 6, '{0, 1, 2, 0, 1, 2}, "three threads");
    run(3'b101, 4, '{0, 2, 0, 2}, "threads 0 and 2");
    run(3'b010, 5, '{1, -1, 1, -1, 1}, "one thread");
    run(3'b000, 3, '{-1, -1, -1}, "no thread");
    run(3'b011, 4, '{0, 1, 0, 1}, "threads 0 and 1");
    // no advance: the choice is held
    @(negedge clk); active = 3'b111;
    begin
      harc_t h0;
      #1 h0 = harc;
      repeat (3) @(negedge clk);
      checks++; if (harc != h0) begin failures++; $display("FAIL harc moved without advance"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
