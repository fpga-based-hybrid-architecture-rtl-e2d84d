// tb_cordic_sincos: compares the rotation CORDIC with $cos/$sin over
// [-pi, pi] and checks its 16-cycle latency.
module tb_cordic_sincos;
  import rrt_pkg::*;
  logic aclk = 0, aresetn = 0, start = 0, busy, done;
  angle_t theta;
  trig_t c, s;
  int checks = 0, failures = 0;

  cordic_sincos dut (.aclk, .aresetn, .start, .theta, .busy, .done, .cos_o(c), .sin_o(s));
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

  task automatic run(input int t);
    int lat;
    real a, ec, es;
    theta <= angle_t'(t); start <= 1;
    @(posedge aclk); start <= 0;
    lat = 0;
    do begin @(posedge aclk); lat++; #1; end while (!done && lat < 100);
    chk(lat == 16, $sformatf("latency %0d", lat));
    a  = real'(t) / 8192.0;
    ec = real'(c) / 16384.0 - $cos(a);
    es = real'(s) / 16384.0 - $sin(a);
    chk(ec < 0.002 && ec > -0.002, $sformatf("cos(%f) got %f", a, real'(c) / 16384.0));
    chk(es < 0.002 && es > -0.002, $sformatf("sin(%f) got %f", a, real'(s) / 16384.0));
  endtask

  initial begin
    theta = 0;
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    @(posedge aclk);
    run(0); run(25735); run(-25735); run(12868); run(-12868); run(20000); run(-20000);
    for (int k = 0; k < 300; k++) run(int'($urandom_range(0, 51470)) - 25735);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
