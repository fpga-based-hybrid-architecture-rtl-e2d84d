// tb_cordic_atan: compares the arctangent CORDIC with $atan2 over all four
// quadrants and checks its 16-cycle latency.
module tb_cordic_atan;
  import rrt_pkg::*;
  logic aclk = 0, aresetn = 0, start = 0, busy, done;
  logic signed [31:0] dx, dy;
  angle_t theta;
  int checks = 0, failures = 0;
  real ref_t, got, err, worst = 0;

  cordic_atan dut (.aclk, .aresetn, .start, .dx, .dy, .busy, .done, .theta);
  always #5 aclk = ~aclk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge aclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int signed x, input int signed y);
    int lat;
    dx <= x; dy <= y; start <= 1;
    @(posedge aclk); start <= 0;
    lat = 0;
    do begin @(posedge aclk); lat++; #1; end while (!done && lat < 100);
    chk(lat == 16, $sformatf("latency %0d", lat));
    ref_t = $atan2(real'(y), real'(x));
    got = real'(theta) / 8192.0;
    err = got - ref_t;
    if (err > 3.1416) err -= 6.2832;
    if (err < -3.1416) err += 6.2832;
    if (err < 0) err = -err;
    if (err > worst) worst = err;
    chk(err < 0.002, $sformatf("atan2(%0d,%0d) got %f want %f", y, x, got, ref_t));
  endtask

  initial begin
    dx = 0; dy = 0;
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    @(posedge aclk);
    run(2048, 0); run(0, 2048); run(-2048, 0); run(0, -2048);
    run(100, 100); run(-100, 100); run(-100, -100); run(100, -100);
    for (int k = 0; k < 300; k++) begin
      int signed x, y;
      x = int'($urandom_range(0, 2 * 131072)) - 131072;
      y = int'($urandom_range(0, 2 * 131072)) - 131072;
      if (x == 0 && y == 0) x = 1;
      run(x, y);
    end
    $display("worst error %f rad", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
