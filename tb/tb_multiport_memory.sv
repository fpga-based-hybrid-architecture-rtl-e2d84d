// tb_multiport_memory: three banks; each cycle a random subset of the
// channels writes consecutive global addresses (as the combinatorial
// circuit issues them) and two read channels read random addresses, which
// are compared with a flat array model of the global address space.
module tb_multiport_memory;
  localparam int unsigned NW = 3, NR = 2, W = 24, D = 31;
  logic aclk = 0;
  logic [NW-1:0] we;
  logic [NW-1:0][31:0] waddr;
  logic [NW-1:0][W-1:0] wdata;
  logic [NR-1:0][31:0] raddr;
  logic [NR-1:0][W-1:0] rdata;
  logic [W-1:0] model [D];
  bit valid [D];
  int checks = 0, failures = 0, base = 0, multi = 0;

  multiport_memory #(.NW(NW), .NR(NR), .WIDTH(W), .DEPTH(D)) dut (.aclk, .we, .waddr, .wdata,
    .raddr, .rdata);
  always #5 aclk = ~aclk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = '0; waddr = '0; wdata = '0; raddr = '0;
    for (int pass = 0; pass < 40; pass++) begin
      base = 0;
      while (base < D) begin
        int cnt;
        @(negedge aclk);
        // reads of what is stored so far
        for (int r = 0; r < NR; r++) begin
          raddr[r] = $urandom_range(0, D + 2);
          #1;
          if (raddr[r] >= D) chk(rdata[r] == '0, "out-of-range read");
          else if (valid[raddr[r]]) chk(rdata[r] == model[raddr[r]],
                                         $sformatf("read %0d", raddr[r]));
        end
        cnt = 0;
        for (int p = 0; p < NW; p++) begin
          we[p] = ($urandom_range(0, 1) == 1) && (base + cnt < D);
          waddr[p] = base + cnt;
          wdata[p] = W'($urandom);
          if (we[p]) cnt++;
        end
        if (cnt > 1) multi++;
        @(posedge aclk);
        for (int p = 0; p < NW; p++)
          if (we[p]) begin model[waddr[p]] = wdata[p]; valid[waddr[p]] = 1; end
        base += cnt;
        #1 we = '0;
      end
    end
    for (int a = 0; a < D; a++) begin
      raddr[0] = a; raddr[1] = D - 1 - a; #1;
      chk(rdata[0] == model[a] && rdata[1] == model[D - 1 - a], "final read-back");
    end
    chk(multi > 0, "simultaneous writes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
