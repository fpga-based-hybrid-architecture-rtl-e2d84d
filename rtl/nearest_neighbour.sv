// nearest_neighbour: finds the tree node closest to a random sample.
//
// The paper says the cores use the box method (the map is cut into square
// boxes) and DSP multipliers for the distance; the sequencing below is this
// design's own.  On `start` the unit latches the sample, works out its box
// number and then reads the nodes 0 .. n_nodes-1 of the memory it is
// attached to, one per clock, through an asynchronous read channel
// (rd_index out, rd_x/rd_y/rd_theta back in the same cycle).  For each node
// it forms the squared Euclidean distance dx*dx + dy*dy (the two
// multipliers).  A node lying in the sample's box or one of the eight boxes
// around it is preferred over any node outside that neighbourhood; among
// equals the smaller distance wins and ties keep the earlier node.  If no
// node lies in the neighbourhood the plain nearest node is returned and
// `fallback` says so.
//
// Timing: `busy` is high while the channel is in use, one node per clock;
// `done` is high in the n-th cycle after the edge that samples `start`
// (n = n_nodes), with the result held until the next start.  With
// n_nodes = 0, done is high in the cycle right after start and `found` is
// low.
module nearest_neighbour
  import rrt_pkg::*;
#(
  parameter int unsigned MAP_W = 512,  // map width, whole units
  parameter int unsigned MAP_H = 512,  // map height, whole units
  parameter int unsigned BOX   = 32    // box edge, whole units
) (
  input  logic        aclk,
  input  logic        aresetn,
  input  logic        start,
  input  logic [31:0] n_nodes,
  input  logic [31:0] sample_x,
  input  logic [31:0] sample_y,
  output logic [31:0] rd_index,
  input  logic [31:0] rd_x,
  input  logic [31:0] rd_y,
  input  logic [31:0] rd_theta,
  output logic        busy,
  output logic        done,
  output logic        found,
  output logic        fallback,
  output logic [31:0] box_no,
  output logic [31:0] best_x,
  output logic [31:0] best_y,
  output logic [31:0] best_theta,
  output logic [31:0] best_index
);
  localparam int unsigned BOXES_X = (MAP_W + BOX - 1) / BOX;

  function automatic logic [31:0] box_of(input logic [31:0] c);
    return (c >> COORD_FRAC) / BOX;
  endfunction

  logic [31:0] sx, sy, n, sbx, sby;
  logic signed [32:0] dx, dy;
  logic [65:0] d2;
  logic [31:0] nbx, nby;
  logic        near_box;
  logic [66:0] key, best_key;

  always_comb begin
    dx  = $signed({1'b0, rd_x}) - $signed({1'b0, sx});
    dy  = $signed({1'b0, rd_y}) - $signed({1'b0, sy});
    d2  = 66'(dx * dx) + 66'(dy * dy);
    nbx = box_of(rd_x);
    nby = box_of(rd_y);
    near_box = ((nbx + 32'd1 >= sbx) && (nbx <= sbx + 32'd1) &&
                (nby + 32'd1 >= sby) && (nby <= sby + 32'd1));
    key = {~near_box, d2};
  end

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      busy <= 1'b0; done <= 1'b0; found <= 1'b0; fallback <= 1'b0;
      rd_index <= '0; sx <= '0; sy <= '0; n <= '0; sbx <= '0; sby <= '0;
      box_no <= '0; best_key <= '1;
      best_x <= '0; best_y <= '0; best_theta <= '0; best_index <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        sx  <= sample_x;
        sy  <= sample_y;
        sbx <= box_of(sample_x);
        sby <= box_of(sample_y);
        box_no   <= box_of(sample_y) * BOXES_X + box_of(sample_x);
        n        <= n_nodes;
        rd_index <= '0;
        best_key <= '1;
        found    <= 1'b0;
        if (n_nodes == 0) done <= 1'b1;
        else              busy <= 1'b1;
      end else if (busy) begin
        if (!found || key < best_key) begin
          best_key   <= key;
          best_x     <= rd_x;
          best_y     <= rd_y;
          best_theta <= rd_theta;
          best_index <= rd_index;
          fallback   <= ~near_box;
        end
        found <= 1'b1;
        if (rd_index == n - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          rd_index <= rd_index + 1;
        end
      end
    end
  end
endmodule
