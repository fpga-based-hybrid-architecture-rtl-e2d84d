// tb_prng: checks the sample generator against an independent model of the
// 64-bit linear congruential recurrence and the modulo reduction.
module tb_prng;
  localparam int unsigned MAP_W = 300, MAP_H = 200;
  logic aclk = 0, aresetn = 0, seed_load = 0, next = 0;
  logic [63:0] seed;
  logic [31:0] sx, sy;
  int checks = 0, failures = 0;
  longint unsigned m;

  prng #(.MAP_W(MAP_W), .MAP_H(MAP_H)) dut (.aclk, .aresetn, .seed_load, .seed, .next,
    .sample_x(sx), .sample_y(sy));

  always #5 aclk = ~aclk;

  function automatic longint unsigned lcg(input longint unsigned s);
    return s * 64'd6364136223846793005 + 64'd1442695040888963407;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge aclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seed = 64'h0123_4567_89ab_cdef;
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    @(posedge aclk);
    seed_load <= 1;
    @(posedge aclk);
    seed_load <= 0;
    m = seed;
    for (int k = 0; k < 200; k++) begin
      longint unsigned a, b;
      next <= 1;
      @(posedge aclk);
      next <= 0;
      #1;
      a = lcg(m); b = lcg(a); m = b;
      chk(sx == 32'(a >> 32) % (MAP_W * 256), $sformatf("x sample %0d: %0d", k, sx));
      chk(sy == 32'(b >> 32) % (MAP_H * 256), $sformatf("y sample %0d: %0d", k, sy));
      chk(sx < MAP_W * 256 && sy < MAP_H * 256, "sample inside map");
      @(posedge aclk);  // idle cycle: the sample must hold
      #1;
      chk(sx == 32'(a >> 32) % (MAP_W * 256), "sample holds without next");
    end
    // a zero seed is replaced by one
    seed <= 0; seed_load <= 1;
    @(posedge aclk); seed_load <= 0; next <= 1;
    @(posedge aclk); next <= 0; #1;
    chk(sx == 32'(lcg(1) >> 32) % (MAP_W * 256), "zero seed maps to 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
