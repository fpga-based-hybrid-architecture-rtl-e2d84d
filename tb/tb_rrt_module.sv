// tb_rrt_module: the testbench is the parent and the memory of one core.
// It grants the bus at random, stores every acknowledged node and checks
// that the first node is the start state, that every later node grew from
// a stored node (parent_index and parent state match the memory) by one
// step of length k, that the core never acknowledges without a grant, and
// that halt ends the run with rrt_done.
module tb_rrt_module;
  import rrt_pkg::*;
  localparam int unsigned NMAX = 200;
  logic aclk = 0, aresetn = 0, go = 0, halt = 0;
  logic [31:0] count, array_column, array_row, array_theta, i, box_no, increment;
  logic [NODE_W-1:0] output_string;
  logic ack, ready, rrt_done, select;
  logic [31:0] mx [NMAX], my [NMAX], mt [NMAX];
  int checks = 0, failures = 0, stored = 0, waits = 0;
  node_t n;

  rrt_module #(.RRT_ID(5), .MAP_W(256), .MAP_H(256), .BOX(16)) dut (
    .aclk, .aresetn, .go, .halt, .rand_input(64'h1234_5678_9abc_def1),
    .start_column(32'd12800), .start_row(32'd25600), .count,
    .array_column, .array_row, .array_theta, .i, .box_no, .increment,
    .output_string, .ack, .ready, .rrt_done, .select);

  assign count        = stored;
  assign array_column = (i < NMAX) ? mx[i] : '0;
  assign array_row    = (i < NMAX) ? my[i] : '0;
  assign array_theta  = (i < NMAX) ? mt[i] : '0;
  assign n = node_t'(output_string);
  always #5 aclk = ~aclk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge aclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge aclk) if (aresetn) begin
    if (ack && !go) begin checks++; failures++; $display("FAIL ack without go"); end
    if (ready && !go) waits++;
  end

  // the parent: store the node on ack
  always @(posedge aclk) if (aresetn && ack && stored < NMAX) begin
    real d;
    chk(n.rrt_id == 5 && n.serial == stored, "id and serial");
    if (stored == 0) begin
      chk(n.x == 12800 && n.y == 25600 && n.parent_index == 32'hffff_ffff, "start node first");
    end else begin
      chk(n.parent_index < stored, "parent index in range");
      chk(n.parent_x == mx[n.parent_index] && n.parent_y == my[n.parent_index] &&
          n.parent_theta == mt[n.parent_index], "parent state matches memory");
      d = $sqrt((real'(n.x) - real'(n.parent_x)) ** 2 + (real'(n.y) - real'(n.parent_y)) ** 2);
      // one step of 8.0 units = 2048, unless clamped at the map border
      chk((d > 2040.0 && d < 2056.0) || n.x == 0 || n.y == 0 || n.x == 65535 || n.y == 65535,
          $sformatf("step length %f", d));
      chk(n.x < 65536 && n.y < 65536, "inside map");
    end
    mx[stored] = n.x; my[stored] = n.y; mt[stored] = n.theta;
    stored++;
  end

  initial begin
    repeat (3) @(posedge aclk);
    aresetn <= 1;
    while (stored < 60) begin
      @(posedge aclk);
      go <= ($urandom_range(0, 2) != 0);
    end
    halt <= 1; go <= 1;
    repeat (200) @(posedge aclk);
    #1;
    chk(rrt_done, "rrt_done after halt");
    chk(increment == stored, "increment counts handed-over nodes");
    chk(waits > 0, "core waited for a grant");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
