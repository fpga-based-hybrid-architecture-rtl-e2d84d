// tb_fifo_node: two child streams with random valid, a parent with random
// ready; checks that the node polls its children in turn, keeps each
// child's order and loses or duplicates nothing.
module tb_fifo_node;
  localparam int unsigned W = 16;
  logic aclk = 0, aresetn = 0;
  logic [1:0][W-1:0] ct;
  logic [1:0] cv, cr;
  logic [W-1:0] m_tdata;
  logic m_tvalid, m_tready;
  bit stop = 0;
  int checks = 0, failures = 0, sent [2], got [2], last = -1, both = 0;

  fifo_node #(.N_CHILD(2), .WIDTH(W), .DEPTH(4)) dut (.aclk, .aresetn, .fifo_out_tdata(ct),
    .fifo_out_tvalid(cv), .fifo_out_tready(cr), .m_tdata, .m_tvalid, .m_tready);
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
    chk(cr != 2'b11, "one child polled at a time");
    if (cv == 2'b11) both++;
    for (int k = 0; k < 2; k++) begin
      if (cr[k]) begin
        if (last >= 0) chk(last != k, "children polled in turn");
        last = k;
      end
      if (cv[k] && cr[k]) begin
        sent[k]++;
        ct[k] <= {1'(k), (W-1)'(sent[k])};
        cv[k] <= !stop && ($urandom_range(0, 1) == 1);
      end else if (!cv[k]) cv[k] <= !stop && ($urandom_range(0, 1) == 1);
    end
    if (cr == 2'b00) last = -1;
    if (m_tvalid && m_tready) begin
      int c;
      c = int'(m_tdata[W-1]);
      chk(m_tdata[W-2:0] == (W-1)'(got[c]), "per-child order");
      got[c]++;
    end
    m_tready <= stop || ($urandom_range(0, 2) != 0);
  end

  initial begin
    cv = 0; m_tready = 0;
    ct[0] = {1'b0, 15'd0}; ct[1] = {1'b1, 15'd0};
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    repeat (3000) @(posedge aclk);
    stop = 1;
    repeat (200) @(posedge aclk);
    chk(got[0] == sent[0] && got[1] == sent[1], $sformatf("all delivered %0d/%0d %0d/%0d",
        got[0], sent[0], got[1], sent[1]));
    chk(sent[0] > 100 && sent[1] > 100 && both > 0, "traffic and contention");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
