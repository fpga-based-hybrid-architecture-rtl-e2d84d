// tb_hybrid_rrt_top: end-to-end run of the hybrid accelerator at a reduced
// size (16 cores, 2 combinatorial, 600 nodes) until the global map is full
// enough; see hybrid_checks.svh for what is checked.
module tb_hybrid_rrt_top;
  import rrt_pkg::*;
  localparam int unsigned N = 16, M = 2, F = 3, DEPTH = 1024, TARGET = 600;
  localparam int unsigned MAP_W = 128, MAP_H = 128, WATCHDOG = 400000;

  hybrid_rrt_top #(.N(N), .M(M), .F(F), .DEPTH(DEPTH), .TARGET(TARGET), .MAP_W(MAP_W),
    .MAP_H(MAP_H), .BOX(16), .FIFO_DEPTH(4)) dut (.*);

  localparam bit EXPECT_BACKPRESSURE = 1'b1;

  `include "hybrid_checks.svh"

  task automatic end_of_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
