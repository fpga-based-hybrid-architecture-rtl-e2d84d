// prng: pseudo-random sample generator of one RRT core.
//
// Draws a random point of the map for the RRT to grow towards.  The paper
// only names this unit and lists what it is built from (multipliers,
// dividers, adders); the recurrence is this design's choice: a 64-bit
// linear congruential generator s' = s * 6364136223846793005 +
// 1442695040888963407 (mod 2^64).  Each `next` request advances it twice;
// the upper 32 bits of the first new state, reduced modulo the map width
// (the divider), give the x sample, those of the second, modulo the map
// height, give y.  Both are Q24.8 coordinates in [0, MAP_W) x [0, MAP_H).
//
// Timing: `seed_load` loads `seed` (a zero seed is replaced by 1); a `next`
// pulse updates sample_x/sample_y on the following clock edge, so a new
// sample is available every cycle.
module prng #(
  parameter int unsigned MAP_W = 512,  // map width, whole units
  parameter int unsigned MAP_H = 512   // map height, whole units
) (
  input  logic        aclk,
  input  logic        aresetn,
  input  logic        seed_load,
  input  logic [63:0] seed,
  input  logic        next,
  output logic [31:0] sample_x,
  output logic [31:0] sample_y
);
  localparam logic [63:0] LCG_A = 64'd6364136223846793005;
  localparam logic [63:0] LCG_C = 64'd1442695040888963407;
  localparam logic [31:0] RANGE_X = 32'(MAP_W) << 8;
  localparam logic [31:0] RANGE_Y = 32'(MAP_H) << 8;

  logic [63:0] state, s1, s2;

  always_comb begin
    s1 = state * LCG_A + LCG_C;
    s2 = s1 * LCG_A + LCG_C;
  end

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      state    <= 64'd1;
      sample_x <= '0;
      sample_y <= '0;
    end else if (seed_load) begin
      state <= (seed == 64'd0) ? 64'd1 : seed;
    end else if (next) begin
      state    <= s2;
      sample_x <= s1[63:32] % RANGE_X;
      sample_y <= s2[63:32] % RANGE_Y;
    end
  end
endmodule
