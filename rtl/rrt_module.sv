// rrt_module: one RRT exploration core.
//
// Grows one rapidly-exploring random tree, one node per iteration, in the
// order the paper draws it: a pseudo-random sample (prng), the nearest node
// already stored (nearest_neighbour, box method, reading the shared memory
// through an asynchronous read channel), and a kinematic extension of one
// step from that node towards the sample (kinematic_path).  The new node is
// offered to the parent module (a POLL or a combinatorial circuit) as a
// 320-bit record on output_string.
//
// The port names and widths follow the paper's symbol of the core:
// array_column/array_row/array_theta and count come from the memory (the
// node read at address i and the number of stored nodes), rand_input seeds
// the generator, box_no is the box of the current sample, increment counts
// the nodes this core has handed over.  The meaning given to each port, and
// the ports start_column/start_row/halt/aresetn, are this design's choices:
// the paper prints the names only.
//
// Handshake (write-acknowledge): while a node waits, `ready` is high.  The
// parent grants the bus with `go`; in a cycle with ready && go the core
// raises `ack` (combinationally) and the parent takes output_string in
// that same cycle.  `select` is high while the core's read channel is in
// use (during the nearest-node scan).  After reset the core first offers
// its start node (its own parent, parent_index = all ones), so that the
// memory is seeded.  `halt` stops the core before it draws another sample
// or, if a node is waiting, drops that node; the core then raises
// `rrt_done` and stays idle until reset.
//
// Timing per node: 2 cycles for the sample, count+1 for the scan, 38+1 for
// the extension, then as long as the parent takes to grant.
module rrt_module
  import rrt_pkg::*;
#(
  parameter int unsigned RRT_ID = 0,
  parameter int unsigned MAP_W  = 512,
  parameter int unsigned MAP_H  = 512,
  parameter int unsigned BOX    = 32,
  parameter logic [31:0] STEP   = 32'h0000_0800
) (
  input  logic         aclk,
  input  logic         aresetn,
  input  logic         go,
  input  logic         halt,
  input  logic [63:0]  rand_input,
  input  logic [31:0]  start_column,
  input  logic [31:0]  start_row,
  input  logic [31:0]  count,
  input  logic [31:0]  array_column,
  input  logic [31:0]  array_row,
  input  logic [31:0]  array_theta,
  output logic [31:0]  i,
  output logic [31:0]  box_no,
  output logic [31:0]  increment,
  output logic [NODE_W-1:0] output_string,
  output logic         ack,
  output logic         ready,
  output logic         rrt_done,
  output logic         select
);
  typedef enum logic [2:0] {R_SEED, R_OUT, R_SAMPLE, R_NNGO, R_NN, R_KIN, R_DONE} rstate_e;
  rstate_e st;

  node_t node;
  logic [31:0] sx, sy;
  logic nn_start, nn_busy, nn_done, nn_found, nn_fallback;
  logic [31:0] bx, by, bth, bidx;
  logic kin_start, kin_busy, kin_done;
  logic [31:0] nx, ny;
  angle_t ntheta;

  prng #(.MAP_W(MAP_W), .MAP_H(MAP_H)) u_prng (
    .aclk, .aresetn, .seed_load(st == R_SEED), .seed(rand_input),
    .next(st == R_SAMPLE), .sample_x(sx), .sample_y(sy));

  nearest_neighbour #(.MAP_W(MAP_W), .MAP_H(MAP_H), .BOX(BOX)) u_nn (
    .aclk, .aresetn, .start(nn_start), .n_nodes(count),
    .sample_x(sx), .sample_y(sy),
    .rd_index(i), .rd_x(array_column), .rd_y(array_row), .rd_theta(array_theta),
    .busy(nn_busy), .done(nn_done), .found(nn_found), .fallback(nn_fallback),
    .box_no, .best_x(bx), .best_y(by), .best_theta(bth), .best_index(bidx));

  kinematic_path #(.MAP_W(MAP_W), .MAP_H(MAP_H), .STEP(STEP)) u_kin (
    .aclk, .aresetn, .start(kin_start), .near_x(bx), .near_y(by),
    .rand_x(sx), .rand_y(sy), .busy(kin_busy), .done(kin_done),
    .new_x(nx), .new_y(ny), .theta(ntheta));

  assign ready         = (st == R_OUT) && !halt;
  assign ack           = ready && go;
  assign select        = nn_busy;
  assign rrt_done      = (st == R_DONE);
  assign output_string = node;
  assign nn_start      = (st == R_NNGO);
  assign kin_start     = (st == R_NN) && nn_done && nn_found;

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      st        <= R_SEED;
      node      <= '0;
      increment <= '0;
    end else begin
      unique case (st)
        R_SEED: begin
          node <= '{x: start_column, y: start_row, theta: '0,
                    parent_x: start_column, parent_y: start_row, parent_theta: '0,
                    parent_index: '1, serial: '0, box_no: '0, rrt_id: RRT_ID};
          st <= R_OUT;
        end
        R_OUT: if (halt) begin
          st <= R_DONE;
        end else if (go) begin
          increment <= increment + 1;
          st <= R_SAMPLE;
        end
        R_SAMPLE: st <= halt ? R_DONE : R_NNGO;
        R_NNGO:   st <= R_NN;
        R_NN: if (nn_done) st <= nn_found ? R_KIN : R_SAMPLE;
        R_KIN: if (kin_done) begin
          node <= '{x: nx, y: ny, theta: 32'(ntheta),
                    parent_x: bx, parent_y: by, parent_theta: bth,
                    parent_index: bidx, serial: increment, box_no: box_no,
                    rrt_id: RRT_ID};
          st <= R_OUT;
        end
        R_DONE: st <= R_DONE;
        default: st <= R_SEED;
      endcase
    end
  end

  // the core never acknowledges without a grant
  a_ack_needs_go: assert property (@(posedge aclk) disable iff (!aresetn) ack |-> (go && ready));
endmodule
