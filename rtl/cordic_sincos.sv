// cordic_sincos: cosine and sine of a heading.
//
// The paper uses a CORDIC core for the trigonometric functions of the
// kinematic path; this is an iterative rotation-mode CORDIC written for the
// purpose.  A Q3.13 heading in [-pi, pi] is folded into [-pi/2, pi/2] (the
// results are negated when it was folded), the vector (K, 0) with the CORDIC
// gain K = 0.6072529 pre-applied is rotated by 16 micro-rotations, and the
// 24-bit Q3.20 datapath is rounded down to Q2.14 outputs.
//
// Timing: the clock edge that samples `start` folds theta; 16 micro-
// rotations follow, one per clock, and `done` is high in the 16th cycle
// after that edge; cos_o/sin_o hold until the next start.
module cordic_sincos
  import rrt_pkg::*;
(
  input  logic   aclk,
  input  logic   aresetn,
  input  logic   start,
  input  angle_t theta,
  output logic   busy,
  output logic   done,
  output trig_t  cos_o,
  output trig_t  sin_o
);
  localparam int unsigned W = 24;
  localparam logic signed [W-1:0] K_GAIN = 24'sd636751;  // 0.6072529 * 2^20
  logic signed [W-1:0] x, y, xs, ys, xn, yn;
  logic signed [17:0]  z;
  logic [4:0]          it;
  logic                neg;

  always_comb begin
    xs = x >>> it;
    ys = y >>> it;
    if (z >= 0) begin xn = x - ys; yn = y + xs; end
    else        begin xn = x + ys; yn = y - xs; end
  end

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      busy <= 1'b0; done <= 1'b0; cos_o <= '0; sin_o <= '0;
      x <= '0; y <= '0; z <= '0; it <= '0; neg <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        it   <= '0;
        x    <= K_GAIN;
        y    <= '0;
        if (theta > ANGLE_HALF_PI) begin
          z <= 18'(theta) - 18'(ANGLE_PI); neg <= 1'b1;
        end else if (theta < -ANGLE_HALF_PI) begin
          z <= 18'(theta) + 18'(ANGLE_PI); neg <= 1'b1;
        end else begin
          z <= 18'(theta); neg <= 1'b0;
        end
      end else if (busy) begin
        x <= xn;
        y <= yn;
        z <= (z >= 0) ? z - 18'(cordic_angle(32'(it))) : z + 18'(cordic_angle(32'(it)));
        it <= it + 1;
        if (it == 5'(CORDIC_ITER - 1)) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          cos_o <= neg ? -trig_t'(xn >>> 6) : trig_t'(xn >>> 6);
          sin_o <= neg ? -trig_t'(yn >>> 6) : trig_t'(yn >>> 6);
        end
      end
    end
  end
endmodule
