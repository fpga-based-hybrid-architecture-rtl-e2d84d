// kinematic_path: extends the tree from the nearest node towards the sample.
//
// Follows the chain the paper draws for the kinematic path: a CORDIC in
// arctangent mode gives the heading theta from the nearest node to the
// random sample, a CORDIC in sin/cos mode gives cos(theta) and sin(theta),
// a multiplier (a DSP slice on the FPGA) scales them by the step length k,
// and adders place the new node at (x_near + k*cos, y_near + k*sin).  The
// step length, the single straight step and the clamp of the result to the
// map are this design's choices; the paper does not give them.
//
// Timing: the edge that samples `start` forms the differences; then come
// the arctangent (17 clocks with its start), sin/cos (17), the multiply (1)
// and the add (1), so `done` is high in the 38th cycle after that edge
// (the testbench checks this).  Results hold until the next start.
module kinematic_path
  import rrt_pkg::*;
#(
  parameter int unsigned MAP_W = 512,           // map width, whole units
  parameter int unsigned MAP_H = 512,           // map height, whole units
  parameter logic [31:0] STEP  = 32'h0000_0800  // k, Q24.8 (8.0 units)
) (
  input  logic        aclk,
  input  logic        aresetn,
  input  logic        start,
  input  logic [31:0] near_x,
  input  logic [31:0] near_y,
  input  logic [31:0] rand_x,
  input  logic [31:0] rand_y,
  output logic        busy,
  output logic        done,
  output logic [31:0] new_x,
  output logic [31:0] new_y,
  output angle_t      theta
);
  localparam logic signed [33:0] MAX_X = 34'((64'(MAP_W) << 8) - 1);
  localparam logic signed [33:0] MAX_Y = 34'((64'(MAP_H) << 8) - 1);

  typedef enum logic [2:0] {K_IDLE, K_ATAN, K_TRIG, K_MUL, K_ADD} kstate_e;
  kstate_e st;

  logic signed [31:0] dx, dy;
  logic [31:0]        nx, ny;
  logic   atan_go, atan_busy, atan_done, trig_go, trig_busy, trig_done;
  angle_t atan_theta;
  trig_t  c, s;
  logic signed [47:0] kc, ks;
  logic signed [33:0] sum_x, sum_y;

  cordic_atan u_atan (
    .aclk, .aresetn, .start(atan_go), .dx, .dy,
    .busy(atan_busy), .done(atan_done), .theta(atan_theta));

  cordic_sincos u_trig (
    .aclk, .aresetn, .start(trig_go), .theta(atan_theta),
    .busy(trig_busy), .done(trig_done), .cos_o(c), .sin_o(s));

  always_comb begin
    sum_x = $signed({2'b00, nx}) + 34'(kc >>> TRIG_FRAC);
    sum_y = $signed({2'b00, ny}) + 34'(ks >>> TRIG_FRAC);
  end

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      st <= K_IDLE; busy <= 1'b0; done <= 1'b0;
      atan_go <= 1'b0; trig_go <= 1'b0;
      dx <= '0; dy <= '0; nx <= '0; ny <= '0; kc <= '0; ks <= '0;
      new_x <= '0; new_y <= '0; theta <= '0;
    end else begin
      done    <= 1'b0;
      atan_go <= 1'b0;
      trig_go <= 1'b0;
      unique case (st)
        K_IDLE: if (start) begin
          dx <= $signed(rand_x) - $signed(near_x);
          dy <= $signed(rand_y) - $signed(near_y);
          nx <= near_x;
          ny <= near_y;
          atan_go <= 1'b1;
          busy <= 1'b1;
          st <= K_ATAN;
        end
        K_ATAN: if (atan_done) begin
          trig_go <= 1'b1;
          theta   <= atan_theta;
          st      <= K_TRIG;
        end
        K_TRIG: if (trig_done) st <= K_MUL;
        K_MUL: begin
          kc <= 48'($signed({1'b0, STEP})) * 48'(c);
          ks <= 48'($signed({1'b0, STEP})) * 48'(s);
          st <= K_ADD;
        end
        K_ADD: begin
          new_x <= (sum_x < 0) ? 32'd0 : (sum_x > MAX_X) ? 32'(MAX_X) : 32'(sum_x);
          new_y <= (sum_y < 0) ? 32'd0 : (sum_y > MAX_Y) ? 32'(MAX_Y) : 32'(sum_y);
          done <= 1'b1;
          busy <= 1'b0;
          st   <= K_IDLE;
        end
        default: st <= K_IDLE;
      endcase
    end
  end
endmodule
