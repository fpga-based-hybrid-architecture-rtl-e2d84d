// rrt_pkg: number formats, the node record and shared constants of the
// hybrid parallel-RRT accelerator.
//
// Coordinates are 32-bit two's-complement fixed point with 24 integer and 8
// fraction bits (resolution 1/256 = 0.00390625), and headings are 16-bit
// two's-complement fixed point with 3 integer and 13 fraction bits
// (resolution 2^-13 = 0.00012207 rad); both formats follow the paper.
// The 320-bit node record that an RRT core hands to its parent is the
// width the paper prints for the core's output bus; how those 320 bits are
// split into fields is this design's own choice (ten 32-bit words, below).
// The CORDIC angle table holds round(atan(2^-i) * 2^13) for i = 0..15.
package rrt_pkg;

  localparam int unsigned COORD_W    = 32;   // Q24.8 coordinate
  localparam int unsigned COORD_FRAC = 8;
  localparam int unsigned ANGLE_W    = 16;   // Q3.13 heading
  localparam int unsigned ANGLE_FRAC = 13;
  localparam int unsigned NODE_W     = 320;  // width of the node bus
  localparam int unsigned TRIG_FRAC  = 14;   // sin/cos are Q2.14

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic signed [ANGLE_W-1:0] angle_t;
  typedef logic signed [15:0]        trig_t;

  // pi and pi/2 in Q3.13
  localparam angle_t ANGLE_PI      = 16'sd25736;
  localparam angle_t ANGLE_HALF_PI = 16'sd12868;

  // One explored node as sent from an RRT core towards a memory.
  typedef struct packed {
    logic [31:0] x;             // column, Q24.8
    logic [31:0] y;             // row, Q24.8
    logic [31:0] theta;         // heading, Q3.13 sign-extended to 32 bits
    logic [31:0] parent_x;      // nearest node the new one grew from
    logic [31:0] parent_y;
    logic [31:0] parent_theta;
    logic [31:0] parent_index;  // its address in the memory the core reads
    logic [31:0] serial;        // running count of nodes from this core
    logic [31:0] box_no;        // box of the random sample
    logic [31:0] rrt_id;        // which core produced the node
  } node_t;

  // Number of CORDIC micro-rotations.
  localparam int unsigned CORDIC_ITER = 16;

  function automatic angle_t cordic_angle(input int unsigned i);
    case (i)
      0:  return 16'sd6434;
      1:  return 16'sd3798;
      2:  return 16'sd2007;
      3:  return 16'sd1019;
      4:  return 16'sd511;
      5:  return 16'sd256;
      6:  return 16'sd128;
      7:  return 16'sd64;
      8:  return 16'sd32;
      9:  return 16'sd16;
      10: return 16'sd8;
      11: return 16'sd4;
      12: return 16'sd2;
      13: return 16'sd1;
      default: return 16'sd0;
    endcase
  endfunction

  // ceil(log2(n)), at least 1, for sizing indices.
  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
