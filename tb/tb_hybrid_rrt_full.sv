// tb_hybrid_rrt_full: the paper's task at the design's default size: 64
// cores, 4 of them combinatorial, explore until the global road-map holds
// 10,000 nodes; see hybrid_checks.svh for what is checked.
module tb_hybrid_rrt_full;
  import rrt_pkg::*;
  localparam int unsigned N = 64, M = 4, F = 3, DEPTH = 102400, TARGET = 10000;
  localparam int unsigned MAP_W = 512, MAP_H = 512, WATCHDOG = 20000000;

  hybrid_rrt_top dut (.*);

  localparam bit EXPECT_BACKPRESSURE = 1'b1;

  `include "hybrid_checks.svh"

  task automatic end_of_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
