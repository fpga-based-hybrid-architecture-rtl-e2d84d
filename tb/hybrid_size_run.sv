// hybrid_size_run: one end-to-end run of hybrid_rrt_top with N cores, M of
// them combinatorial, at the default memory, map and node target (10,000
// nodes).  Used by tb_hybrid_rrt_sizes to run several system sizes one
// after the other: its clock runs from `start` until the run is over.  It
// applies the checks of hybrid_checks.svh; instead of finishing the
// simulation it stops its clock, raises `finished` and reports its check
// and failure counts.  Tree back-pressure is counted but not required, since a
// smaller system need not fill its tree.
module hybrid_size_run #(
  parameter int unsigned N = 4,
  parameter int unsigned M = 1
) (
  input  logic start,
  output int   checks_o,
  output int   failures_o,
  output logic finished
);
  import rrt_pkg::*;
  localparam int unsigned F = 3, DEPTH = 102400, TARGET = 10000;
  localparam int unsigned MAP_W = 512, MAP_H = 512, WATCHDOG = 30000000;
  localparam bit EXPECT_BACKPRESSURE = 1'b0;

  hybrid_rrt_top #(.N(N), .M(M)) dut (.*);

  `include "hybrid_checks.svh"

  // the clock stands still until `start` and again after the run
  initial begin
    finished   = 1'b0;
    stop_clock = 1'b1;
    wait (start);
    stop_clock = 1'b0;
  end
  assign checks_o   = checks;
  assign failures_o = failures;

  task automatic end_of_run();
    stop_clock = 1'b1;
    finished   = 1'b1;
  endtask
endmodule
