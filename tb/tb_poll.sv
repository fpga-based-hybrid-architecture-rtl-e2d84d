// tb_poll: two modelled RRT children raise ready at random; the testbench
// checks the cyclic polling (one grant at a time, alternating), that every
// node arrives once and in order per child, and that a full FIFO stalls.
module tb_poll;
  localparam int unsigned W = 32;
  logic aclk = 0, aresetn = 0;
  logic [1:0] ready, ack, go;
  logic [1:0][W-1:0] os;
  logic [W-1:0] tdata;
  logic tvalid, tready;
  int checks = 0, failures = 0, sent [2], got [2], skips = 0, stalls = 0;
  int last_go = -1;

  poll #(.N_CHILD(2), .WIDTH(W)) dut (.aclk, .aresetn, .ready, .ack, .output_string(os), .go,
    .fifo_in_tdata(tdata), .fifo_in_tvalid(tvalid), .fifo_in_tready(tready));

  assign ack = ready & go;   // the cores' write-acknowledge
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
    chk(go != 2'b11, "one child granted at a time");
    if (tvalid && !tready) stalls++;
    if (go == 2'b00 && !(tvalid && !tready)) begin checks++; failures++; $display("FAIL no grant"); end
    for (int k = 0; k < 2; k++) begin
      if (go[k]) begin
        if (last_go >= 0) chk(last_go != k, "children polled in turn");
        last_go = k;
        if (!ready[k]) skips++;
      end
      if (ack[k]) sent[k]++;
    end
    if (tvalid && tready) begin
      int c;
      c = int'(tdata[W-1]);
      chk(tdata[W-2:0] == (W-1)'(got[c]), $sformatf("child %0d order", c));
      got[c]++;
    end
    if (go == 2'b00) last_go = -1;
  end

  always @(posedge aclk) if (aresetn) begin
    for (int k = 0; k < 2; k++) begin
      if (ack[k]) begin ready[k] <= 1'b0; os[k] <= {1'(k), os[k][W-2:0] + 1'b1}; end
      else if (!ready[k]) ready[k] <= ($urandom_range(0, 2) == 0);
    end
    tready <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    ready = '0; tready = 0;
    os[0] = {1'b0, 31'd0}; os[1] = {1'b1, 31'd0};
    repeat (2) @(posedge aclk);
    aresetn <= 1;
    repeat (3000) @(posedge aclk);
    chk(got[0] + got[1] > 200, "throughput");
    chk(got[0] >= sent[0] - 1 && got[1] >= sent[1] - 1, "nothing lost");
    chk(skips > 0 && stalls > 0, "skip and stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
