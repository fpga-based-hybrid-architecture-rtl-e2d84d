// tb_combinatorial_block: three writers offer node records at random into
// a 20-word block; checks that all requesters are served in the same clock,
// that each record's x, y, theta land at consecutive addresses above the
// fill level, read-back through both read channels, and that writing stops
// once the block has no room for three more nodes.
module tb_combinatorial_block;
  import rrt_pkg::*;
  localparam int unsigned NP = 3, NR = 2, F = 3, D = 20;
  logic aclk = 0, aresetn = 0;
  logic [NP-1:0] req, allow, go, we;
  logic [NP-1:0][NODE_W-1:0] wnode;
  logic room;
  logic [31:0] count;
  logic [NR-1:0][31:0] raddr, rcol, rrow, rtheta;
  logic [NR-1:0][F*32-1:0] rdata;
  logic [31:0] mx [D], my [D], mt [D];
  int checks = 0, failures = 0, cnt = 0, multi = 0, full_seen = 0;

  combinatorial_block #(.NP(NP), .NR(NR), .F(F), .DEPTH(D)) dut (.aclk, .aresetn, .req, .wnode,
    .allow, .go, .room, .count, .we, .raddr, .rdata, .rcol, .rrow, .rtheta);
  always #5 aclk = ~aclk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge aclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; allow = '1; wnode = '0; raddr = '0;
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    for (int t = 0; t < 60; t++) begin
      int k;
      @(negedge aclk);
      for (int p = 0; p < NP; p++) begin
        node_t n;
        n = '0;
        n.x = $urandom; n.y = $urandom; n.theta = $urandom;
        wnode[p] = n;
        req[p] = ($urandom_range(0, 1) == 1);
      end
      allow = (t % 7 == 3) ? 3'b010 : '1;
      for (int r = 0; r < NR; r++) raddr[r] = (cnt == 0) ? 0 : $urandom_range(0, cnt - 1);
      #1;
      chk(count == cnt, "fill level");
      chk(room == (cnt + NP <= D), "room flag");
      if (!room) full_seen++;
      for (int r = 0; r < NR; r++)
        if (raddr[r] < cnt)
          chk(rcol[r] == mx[raddr[r]] && rrow[r] == my[raddr[r]] && rtheta[r] == mt[raddr[r]],
              $sformatf("read %0d", raddr[r]));
      k = 0;
      for (int p = 0; p < NP; p++) begin
        bit g;
        node_t n;
        g = (cnt + NP <= D) && allow[p];
        chk(go[p] == g && we[p] == (g && req[p]), "grant and write enable");
        if (g && req[p]) begin
          n = node_t'(wnode[p]);
          mx[cnt + k] = n.x; my[cnt + k] = n.y; mt[cnt + k] = n.theta;
          k++;
        end
      end
      if (k > 1) multi++;
      cnt += k;
    end
    chk(multi > 0 && full_seen > 0, "same-clock writes and full block exercised");
    chk(cnt <= D, "never overfilled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
