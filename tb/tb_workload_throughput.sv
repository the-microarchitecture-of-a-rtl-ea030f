// tb_workload_throughput: the published throughput table for the three-stage
// cores, run on this RTL. Three benches run side by side:
//   T022 (pool 2): 48.43 / 96.86 MIPS at 8.9 ns for 1 / 2 threads
//   T023 (pool 3): 44.44 / 88.87 / 103.09 MIPS at 9.7 ns for 1 / 2 / 3 threads
//   T024 (pool 4): 45.85 / 91.71 / 106.38 / 106.38 MIPS at 9.4 ns, 1..4 threads
// Each bench (tb_throughput_bench) measures instructions per cycle with 1 ..
// pool-size active threads on an integer kernel with one taken jump every six
// instructions and checks it against the interleaving model and against the
// published MIPS x cycle time. The kernels behind the published figures are
// not known; the six-instruction loop is this testbench's choice. Cycle times
// are not reproduced by simulation, only instructions per cycle.
module tb_workload_throughput;
  logic d2, d3, d4;
  int   c2, c3, c4, f2, f3, f4;

  tb_throughput_bench #(.POOL(2), .CYCLE_NS(8.9), .MIPS_1(48.43), .MIPS_2(96.86), .MIPS_3(96.86))
    t022 (.done_o(d2), .checks_o(c2), .failures_o(f2));
  tb_throughput_bench #(.POOL(3), .CYCLE_NS(9.7), .MIPS_1(44.44), .MIPS_2(88.87), .MIPS_3(103.09))
    t023 (.done_o(d3), .checks_o(c3), .failures_o(f3));
  tb_throughput_bench #(.POOL(4), .CYCLE_NS(9.4), .MIPS_1(45.85), .MIPS_2(91.71), .MIPS_3(106.38))
    t024 (.done_o(d4), .checks_o(c4), .failures_o(f4));

  initial begin
    #400000;
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c3 + c4, f2 + f3 + f4 + 1);
    $finish;
  end

  initial begin
    #1;
    wait (d2 && d3 && d4);
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c3 + c4, f2 + f3 + f4);
    $finish;
  end
endmodule
