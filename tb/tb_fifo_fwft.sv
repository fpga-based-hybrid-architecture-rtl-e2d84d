// tb_fifo_fwft: random pushes and pops against a queue model; checks the
// first-word-fall-through head, the full flag at DEPTH and empty behaviour.
module tb_fifo_fwft;
  localparam int unsigned W = 16, D = 4;
  logic aclk = 0, aresetn = 0;
  logic [W-1:0] s_tdata, m_tdata;
  logic s_tvalid, s_tready, m_tvalid, m_tready;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, fulls = 0, empties = 0;

  fifo_fwft #(.WIDTH(W), .DEPTH(D)) dut (.aclk, .aresetn, .s_tdata, .s_tvalid, .s_tready,
    .m_tdata, .m_tvalid, .m_tready);
  always #5 aclk = ~aclk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge aclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge aclk) if (aresetn) begin
    chk(s_tready == (q.size() < D), "full flag");
    chk(m_tvalid == (q.size() > 0), "valid flag");
    if (q.size() == D) fulls++;
    if (q.size() == 0) empties++;
    if (m_tvalid && q.size() > 0) chk(m_tdata == q[0], "head word");
    if (m_tvalid && m_tready) void'(q.pop_front());
    if (s_tvalid && s_tready) q.push_back(s_tdata);
    s_tvalid <= ($urandom_range(0, 1) == 1);
    s_tdata  <= W'($urandom);
    m_tready <= ($urandom_range(0, 2) == 0) || (fulls > 100 && $urandom_range(0, 1) == 0);
  end

  initial begin
    s_tvalid = 0; m_tready = 0; s_tdata = 0;
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    repeat (4000) @(posedge aclk);
    chk(fulls > 0 && empties > 0, "full and empty reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
