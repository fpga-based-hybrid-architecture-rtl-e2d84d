// tb_hybrid_rrt_sizes: the 10,000-node exploration task at the smaller
// system sizes of 32 and 16 cores (3 and 2 of them combinatorial), each
// on the default 512x512 map and 102,400-word memories.  The systems are
// hybrid_size_run instances run one after the other (the second starts
// when the first is over); the testbench sums their checks.  The split M
// for these sizes is this testbench's choice.
module tb_hybrid_rrt_sizes;
  int c32, f32, c16, f16;
  logic d32, d16;

  hybrid_size_run #(.N(32), .M(3)) u_n32 (.start(1'b1), .checks_o(c32), .failures_o(f32), .finished(d32));
  hybrid_size_run #(.N(16), .M(2)) u_n16 (.start(d32), .checks_o(c16), .failures_o(f16), .finished(d16));

  int checks, failures;

  initial begin
    #1;
    wait (d32 && d16);
    checks   = c32 + c16;
    failures = f32 + f16;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // overall watchdog: each run also has its own
  initial begin
    #400ms;
    $display("watchdog: runs finished 32:%0b 16:%0b", d32, d16);
    $display("TB_RESULT checks=%0d failures=%0d", c32 + c16, f32 + f16 + 1);
    $finish;
  end
endmodule
