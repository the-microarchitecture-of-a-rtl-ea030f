// tb_core_clock_gate: the latch-based clock gate. The enable and test-enable
// change at random times, also while the clock is high. Each rising edge of
// the gated clock must match a rising edge of the input clock whose enable
// (or test enable) was sampled during the preceding low phase; the gated
// clock must never be high while the input clock is low (no glitches), and
// it must not be cut short while the input clock is high.
module tb_core_clock_gate;
  logic clk = 0, en = 0, ten = 0, gclk;
  int checks = 0, failures = 0, gated_edges = 0, expected_edges = 0;
  logic en_low_phase;

  core_clock_gate dut (.clk_i(clk), .en_i(en), .test_en_i(ten), .clk_o(gclk));

  always #5 clk = ~clk;

  // enable seen at the end of the low phase decides the next high phase
  always @(posedge clk) if (en_low_phase) expected_edges++;
  always @(posedge gclk) gated_edges++;

  // glitch checks sampled every 1 ns
  initial begin
    logic prev_g = 0, prev_c = 0;
    forever begin
      #1;
      checks++;
      if (gclk && !clk) begin
        failures++; $display("FAIL gated clock high while clock low at %0t", $time);
      end
      if (prev_g && prev_c && clk && !gclk) begin
        failures++; $display("FAIL gated clock pulse cut short at %0t", $time);
      end
      prev_g = gclk; prev_c = clk;
    end
  end

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      #($urandom_range(1, 9));
      en  = ($urandom % 3) != 0;
      ten = ($urandom % 10) == 0;
    end
    #20;
    checks++;
    if (gated_edges != expected_edges) begin
      failures++; $display("FAIL %0d gated edges, expected %0d", gated_edges, expected_edges);
    end
    $display("gated edges %0d", gated_edges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // track the enable level at the end of each low phase
  always @(en or ten or clk) if (!clk) en_low_phase = en || ten;
endmodule
