// tb_hierarchical_block: five modelled cores (not a power of two, so one
// POLL serves a single core) offer numbered nodes at random; the root
// stream is drained with random back-pressure.  Checks that every node
// arrives exactly once, in order per core, and that siblings had to wait.
module tb_hierarchical_block;
  localparam int unsigned H = 5, W = 16;
  logic aclk = 0, aresetn = 0;
  logic [H-1:0] ready, ack, go;
  logic [H-1:0][W-1:0] os;
  logic [W-1:0] m_tdata;
  logic m_tvalid, m_tready;
  bit stop = 0;
  int checks = 0, failures = 0, sent [H], got [H], waits = 0, backp = 0;

  hierarchical_block #(.H(H), .WIDTH(W), .DEPTH(4)) dut (.aclk, .aresetn, .ready, .ack,
    .output_string(os), .go, .m_tdata, .m_tvalid, .m_tready);

  assign ack = ready & go;
  always #5 aclk = ~aclk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (40000) @(posedge aclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge aclk) if (aresetn) begin
    for (int k = 0; k < H; k++) begin
      if (ready[k] && !go[k]) waits++;
      if (ack[k]) begin
        sent[k]++;
        ready[k] <= 1'b0;
        os[k] <= {4'(k), 12'(os[k][11:0] + 1)};
      end else if (!ready[k]) ready[k] <= !stop && ($urandom_range(0, 3) == 0);
    end
    if (m_tvalid && !m_tready) backp++;
    if (m_tvalid && m_tready) begin
      int c;
      c = int'(m_tdata[15:12]);
      chk(c < H, "core id");
      if (c < H) begin
        chk(m_tdata[11:0] == 12'(got[c]), $sformatf("core %0d order", c));
        got[c]++;
      end
    end
    m_tready <= stop || ($urandom_range(0, 3) != 0);
  end

  initial begin
    ready = '0; m_tready = 0;
    for (int k = 0; k < H; k++) os[k] = {4'(k), 12'd0};
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    repeat (4000) @(posedge aclk);
    stop = 1;
    repeat (300) @(posedge aclk);
    for (int k = 0; k < H; k++)
      chk(got[k] == sent[k] && sent[k] > 50, $sformatf("core %0d: %0d of %0d", k, got[k], sent[k]));
    chk(waits > 0 && backp > 0, "sibling waits and back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
