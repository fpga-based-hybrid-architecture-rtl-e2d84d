// tb_combinatorial_circuit: all 2^4 request patterns, with and without
// room and with random per-channel permission; expected grants and slot
// offsets are counted out bit by bit.
module tb_combinatorial_circuit;
  localparam int unsigned NP = 4, OW = 3;
  logic [NP-1:0] req, allow, go, we;
  logic [NP-1:0][OW-1:0] offset;
  logic [OW-1:0] n_wr;
  logic room;
  int checks = 0, failures = 0;

  combinatorial_circuit #(.NP(NP), .OW(OW)) dut (.req, .room, .allow, .go, .we, .offset, .n_wr);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 2; r++)
      for (int a = 0; a < 3; a++)
        for (int v = 0; v < (1 << NP); v++) begin
          int cnt;
          req = NP'(v); room = r[0];
          allow = (a == 0) ? '1 : (a == 1) ? '0 : NP'($urandom);
          #1;
          cnt = 0;
          for (int p = 0; p < NP; p++) begin
            bit g;
            g = room && allow[p];
            chk(go[p] == g, "grant");
            chk(we[p] == (g && req[p]), "write enable");
            if (g && req[p]) begin
              chk(offset[p] == OW'(cnt), $sformatf("slot of writer %0d in case %b", p, req));
              cnt++;
            end
          end
          chk(n_wr == OW'(cnt), "number of writes");
          #9;
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
