// tb_kinematic_path: checks that the new node lies one step k from the
// nearest node in the direction of the sample, that it is clamped to the
// map, and that the extension takes 38 cycles.
module tb_kinematic_path;
  import rrt_pkg::*;
  localparam int unsigned MAP_W = 512, MAP_H = 512;
  localparam logic [31:0] STEP = 32'h0000_0800;
  logic aclk = 0, aresetn = 0, start = 0, busy, done;
  logic [31:0] near_x, near_y, rand_x, rand_y, new_x, new_y;
  angle_t theta;
  int checks = 0, failures = 0;

  kinematic_path #(.MAP_W(MAP_W), .MAP_H(MAP_H), .STEP(STEP)) dut (.aclk, .aresetn, .start,
    .near_x, .near_y, .rand_x, .rand_y, .busy, .done, .new_x, .new_y, .theta);
  always #5 aclk = ~aclk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge aclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nx, input int ny, input int rx, input int ry);
    int lat;
    real a, ex, ey;
    near_x <= nx; near_y <= ny; rand_x <= rx; rand_y <= ry; start <= 1;
    @(posedge aclk); start <= 0;
    lat = 0;
    do begin @(posedge aclk); lat++; #1; end while (!done && lat < 200);
    chk(lat == 38, $sformatf("latency %0d", lat));
    a  = $atan2(real'(ry - ny), real'(rx - nx));
    ex = real'(nx) + 2048.0 * $cos(a);
    ey = real'(ny) + 2048.0 * $sin(a);
    if (ex < 0) ex = 0;
    if (ey < 0) ey = 0;
    if (ex > MAP_W * 256 - 1) ex = MAP_W * 256 - 1;
    if (ey > MAP_H * 256 - 1) ey = MAP_H * 256 - 1;
    chk((real'(new_x) - ex) < 4.0 && (real'(new_x) - ex) > -4.0,
        $sformatf("x: got %0d want %f", new_x, ex));
    chk((real'(new_y) - ey) < 4.0 && (real'(new_y) - ey) > -4.0,
        $sformatf("y: got %0d want %f", new_y, ey));
    chk((real'(theta) / 8192.0 - a) < 0.002 && (real'(theta) / 8192.0 - a) > -0.002,
        "heading");
  endtask

  initial begin
    {near_x, near_y, rand_x, rand_y} = '0;
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    @(posedge aclk);
    run(100 * 256, 100 * 256, 200 * 256, 100 * 256);
    run(100 * 256, 100 * 256, 100 * 256, 10 * 256);
    run(2 * 256, 2 * 256, 0, 0);                       // clamped at the origin
    run(511 * 256, 300 * 256, 511 * 256 + 255, 300 * 256);  // clamped at the far edge
    for (int k = 0; k < 200; k++)
      run(int'($urandom_range(0, 131071)), int'($urandom_range(0, 131071)),
          int'($urandom_range(0, 131071)), int'($urandom_range(0, 131071)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
