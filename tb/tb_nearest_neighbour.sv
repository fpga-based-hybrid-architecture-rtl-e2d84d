// tb_nearest_neighbour: an array in the testbench plays the memory; the
// expected nearest node is found by a separate search that applies the
// box-neighbourhood preference, and the scan length is checked (one clock per node).
module tb_nearest_neighbour;
  localparam int unsigned MAP_W = 256, MAP_H = 256, BOX = 16, NMAX = 64;
  logic aclk = 0, aresetn = 0, start = 0;
  logic [31:0] n_nodes, sample_x, sample_y, rd_index, rd_x, rd_y, rd_theta;
  logic busy, done, found, fallback;
  logic [31:0] box_no, best_x, best_y, best_theta, best_index;
  logic [31:0] mx [NMAX], my [NMAX], mt [NMAX];
  int checks = 0, failures = 0, n_fallback = 0;

  nearest_neighbour #(.MAP_W(MAP_W), .MAP_H(MAP_H), .BOX(BOX)) dut (.aclk, .aresetn, .start,
    .n_nodes, .sample_x, .sample_y, .rd_index, .rd_x, .rd_y, .rd_theta, .busy, .done, .found,
    .fallback, .box_no, .best_x, .best_y, .best_theta, .best_index);

  assign rd_x     = (rd_index < NMAX) ? mx[rd_index] : 32'hdead_beef;
  assign rd_y     = (rd_index < NMAX) ? my[rd_index] : 32'hdead_beef;
  assign rd_theta = (rd_index < NMAX) ? mt[rd_index] : 32'hdead_beef;
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

  task automatic run(input int n, input int sx, input int sy);
    int lat, want, sbx, sby;
    longint best_d;
    bit best_near, near;
    sample_x <= sx; sample_y <= sy; n_nodes <= n; start <= 1;
    @(posedge aclk); start <= 0;
    #1 lat = 0;
    while (!done && lat < 1000) begin @(posedge aclk); lat++; #1; end
    chk(lat == n, $sformatf("scan cycles %0d for %0d nodes", lat, n));
    sbx = (sx / 256) / BOX; sby = (sy / 256) / BOX;
    chk(box_no == sby * ((MAP_W + BOX - 1) / BOX) + sbx, "box number");
    if (n == 0) begin chk(!found, "empty tree"); return; end
    want = -1; best_d = 0; best_near = 0;
    for (int k = 0; k < n; k++) begin
      longint ddx, ddy, d;
      int bx, by;
      ddx = longint'(mx[k]) - sx; ddy = longint'(my[k]) - sy; d = ddx * ddx + ddy * ddy;
      bx = (mx[k] / 256) / BOX; by = (my[k] / 256) / BOX;
      near = (bx - sbx <= 1) && (sbx - bx <= 1) && (by - sby <= 1) && (sby - by <= 1);
      if (want < 0 || (near && !best_near) || (near == best_near && d < best_d)) begin
        want = k; best_d = d; best_near = near;
      end
    end
    if (!best_near) n_fallback++;
    chk(found && best_index == want, $sformatf("nearest index %0d want %0d", best_index, want));
    chk(best_x == mx[want] && best_y == my[want] && best_theta == mt[want], "nearest state");
    chk(fallback == !best_near, "fallback flag");
  endtask

  initial begin
    n_nodes = 0; sample_x = 0; sample_y = 0;
    for (int k = 0; k < NMAX; k++) begin
      mx[k] = $urandom_range(0, MAP_W * 256 - 1);
      my[k] = $urandom_range(0, MAP_H * 256 - 1);
      mt[k] = $urandom;
    end
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    @(posedge aclk);
    run(0, 100, 100);
    run(1, 5000, 7000);
    for (int k = 0; k < 300; k++)
      run(int'($urandom_range(1, NMAX)), int'($urandom_range(0, MAP_W * 256 - 1)),
          int'($urandom_range(0, MAP_H * 256 - 1)));
    chk(n_fallback > 0, "fallback case exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
