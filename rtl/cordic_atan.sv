// cordic_atan: heading from one point towards another, atan2(dy, dx).
//
// The paper uses a CORDIC core in arctangent mode for this step of the
// kinematic path; this is an iterative vectoring-mode CORDIC written for
// the purpose.  The vector (dx, dy) is first turned into the right half
// plane (by -pi/2 or +pi/2 when dx < 0), then 16 micro-rotations drive y to
// zero while accumulating the angle from the table in rrt_pkg.  The inputs
// are Q24.8 differences; they are shifted left by 12 bits into a 48-bit
// datapath so that short vectors keep their precision.  The result is a
// Q3.13 heading in [-pi, pi]; atan2(0, 0) gives 0.
//
// Timing: the clock edge that samples `start` sets the vector up; one
// micro-rotation per clock follows, so `done` is high in the 16th cycle
// after that edge, and `theta` holds until the next start.
module cordic_atan
  import rrt_pkg::*;
(
  input  logic        aclk,
  input  logic        aresetn,
  input  logic        start,
  input  logic signed [31:0] dx,
  input  logic signed [31:0] dy,
  output logic        busy,
  output logic        done,
  output angle_t      theta
);
  localparam int unsigned W = 48;
  logic signed [W-1:0] x, y;
  logic signed [17:0]  z;
  logic [4:0]          it;
  logic signed [W-1:0] xs, ys, dxw, dyw;

  always_comb begin
    xs  = x >>> it;
    ys  = y >>> it;
    dxw = W'(dx) <<< 12;
    dyw = W'(dy) <<< 12;
  end

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      busy <= 1'b0; done <= 1'b0; theta <= '0;
      x <= '0; y <= '0; z <= '0; it <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        it   <= '0;
        if (dx < 0) begin
          if (dy >= 0) begin x <= dyw;  y <= -dxw; z <= 18'(ANGLE_HALF_PI); end
          else         begin x <= -dyw; y <= dxw;  z <= -18'(ANGLE_HALF_PI); end
        end else begin
          x <= dxw; y <= dyw; z <= '0;
        end
      end else if (busy) begin
        if (y > 0) begin
          x <= x + ys; y <= y - xs; z <= z + 18'(cordic_angle(32'(it)));
        end else if (y < 0) begin
          x <= x - ys; y <= y + xs; z <= z - 18'(cordic_angle(32'(it)));
        end
        if (it == 5'(CORDIC_ITER - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          // the last update of z is folded in here
          if (y > 0)      theta <= angle_t'(z + 18'(cordic_angle(32'(it))));
          else if (y < 0) theta <= angle_t'(z - 18'(cordic_angle(32'(it))));
          else            theta <= angle_t'(z);
        end
        it <= it + 1;
      end
    end
  end
endmodule
