// Shared body of the end-to-end testbenches of hybrid_rrt_top.  The
// including module declares N, M, F, DEPTH, TARGET, MAP_W, MAP_H, WATCHDOG
// and EXPECT_BACKPRESSURE, instantiates the top as `dut` with the signals
// declared here, and provides the task end_of_run, called once when the
// run is over (normally: print TB_RESULT and finish).
//
// It keeps shadow copies of both memories by watching their write
// channels, and checks every stored node: a non-start node must name a
// parent that is already stored, with the same state, and lie one step
// (8.0 units) from it unless clamped at the border.  It counts how often
// each mechanism of the design happened and counts a failure for any that
// never did.

  logic aclk = 0, aresetn = 0;
  logic [N-1:0][31:0] start_column, start_row;
  logic [N-1:0][63:0] rand_seed;
  logic [31:0] host_raddr, global_count, comb_count, cycles;
  logic [F*32-1:0] host_rdata;
  logic [N-1:0] rrt_done;
  logic done, irq;

  int checks = 0, failures = 0;
  int n_comb_multi = 0, n_merge = 0, n_poll_skip = 0, n_sibling_wait = 0;
  int n_backpressure = 0, n_fallback = 0, n_halted = 0, n_irq = 0, n_hier_writes = 0;
  int per_core [N];
  logic [31:0] gx [DEPTH], gy [DEPTH], gt [DEPTH], ix [DEPTH], iy [DEPTH], it [DEPTH];

  bit stop_clock = 1'b0;   // freezes the clock where several runs share a simulation
  always begin
    #5;
    if (stop_clock) wait (!stop_clock);
    aclk = ~aclk;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic check_node(input node_t n, input bit global_side);
    real d;
    if (n.parent_index == 32'hffff_ffff) begin
      chk(n.x == start_column[n.rrt_id] && n.y == start_row[n.rrt_id], "start node");
      return;
    end
    if (global_side) begin
      chk(n.parent_index < global_count && gx[n.parent_index] == n.parent_x &&
          gy[n.parent_index] == n.parent_y && gt[n.parent_index] == n.parent_theta,
          $sformatf("core %0d parent in global map", n.rrt_id));
    end else begin
      chk(n.parent_index < comb_count && ix[n.parent_index] == n.parent_x &&
          iy[n.parent_index] == n.parent_y && it[n.parent_index] == n.parent_theta,
          $sformatf("core %0d parent in combinatorial memory", n.rrt_id));
    end
    d = $sqrt((real'(n.x) - real'(n.parent_x)) ** 2 + (real'(n.y) - real'(n.parent_y)) ** 2);
    chk((d > 2040.0 && d < 2056.0) || n.x == 0 || n.y == 0 ||
        n.x == MAP_W * 256 - 1 || n.y == MAP_H * 256 - 1, $sformatf("step length %f", d));
  endtask

  // monitors
  always @(posedge aclk) if (aresetn) begin
    int nw;
    nw = 0;
    for (int p = 0; p < M; p++) if (dut.u_inner.we[p]) begin
      node_t n;
      n = node_t'(dut.node[p]);
      check_node(n, 1'b0);
      ix[dut.u_inner.waddr[p]] = n.x; iy[dut.u_inner.waddr[p]] = n.y;
      it[dut.u_inner.waddr[p]] = n.theta;
      nw++;
    end
    if (nw > 1) n_comb_multi++;
    for (int p = 0; p <= M; p++) if (dut.u_global.we[p]) begin
      node_t n;
      n = node_t'(dut.g_node[p]);
      if (p == M) begin check_node(n, 1'b1); n_hier_writes++; end
      chk(n.rrt_id < N && ((p < M) == (n.rrt_id < M)), "node enters through its own side");
      per_core[n.rrt_id]++;
      gx[dut.u_global.waddr[p]] = n.x; gy[dut.u_global.waddr[p]] = n.y;
      gt[dut.u_global.waddr[p]] = n.theta;
    end
    if (dut.u_global.we[M] && dut.u_global.we[M-1:0] != '0) n_merge++;
    for (int c = M; c < N; c++) begin
      if (dut.go[c] && !dut.ready[c]) n_poll_skip++;
      if (dut.ready[c] && !dut.go[c] && !done) n_sibling_wait++;
    end
    if (dut.hier_tvalid && !dut.hier_tready) n_backpressure++;
    if (dut.g_core[0].u_rrt.u_nn.done && dut.g_core[0].u_rrt.u_nn.fallback) n_fallback++;
    if (dut.g_core[M].u_rrt.u_nn.done && dut.g_core[M].u_rrt.u_nn.fallback) n_fallback++;
    if (irq) n_irq++;
  end

  initial begin
    repeat (WATCHDOG) @(posedge aclk);
    failures++;
    $display("watchdog: N=%0d global_count=%0d", N, global_count);
    end_of_run();
  end

  initial begin
    int seen;
    host_raddr = '0;
    for (int c = 0; c < N; c++) begin
      start_column[c] = $urandom_range(0, MAP_W * 256 - 1);
      start_row[c]    = $urandom_range(0, MAP_H * 256 - 1);
      rand_seed[c]    = {$urandom, $urandom};
    end
    repeat (3) @(posedge aclk);
    aresetn <= 1;
    wait (done);
    // cores that were scanning park when their scan ends
    for (int k = 0; k < 40000 && rrt_done == '0; k++) @(posedge aclk);
    repeat (10) @(posedge aclk);
    chk(global_count >= TARGET && global_count <= TARGET + M + 1,
        $sformatf("global count %0d", global_count));
    chk(comb_count <= global_count, "combinatorial nodes all in the global map");
    chk(cycles > 0 && n_irq == 1, "cycle counter and interrupt");
    for (int c = 0; c < N; c++) begin
      chk(per_core[c] >= 2, $sformatf("core %0d stored %0d nodes", c, per_core[c]));
      if (rrt_done[c]) n_halted++;
    end
    for (int k = 0; k < 64; k++) begin
      @(negedge aclk);
      host_raddr = $urandom_range(0, global_count - 1);
      #1;
      chk(host_rdata[31:0] == gx[host_raddr] && host_rdata[63:32] == gy[host_raddr] &&
          host_rdata[95:64] == gt[host_raddr], "host read of the global map");
      chk(gx[host_raddr] < MAP_W * 256 && gy[host_raddr] < MAP_H * 256, "node inside map");
    end
    $display("N=%0d M=%0d cycles=%0d global=%0d comb=%0d hier_writes=%0d", N, M, cycles, global_count, comb_count,
             n_hier_writes);
    $display("mechanisms: comb_multi_write=%0d global_merge=%0d poll_skip=%0d sibling_wait=%0d",
             n_comb_multi, n_merge, n_poll_skip, n_sibling_wait);
    $display("mechanisms: tree_backpressure=%0d nn_fallback=%0d halted_cores=%0d irq=%0d",
             n_backpressure, n_fallback, n_halted, n_irq);
    seen = 0;
    foreach (per_core[c]) seen += per_core[c];
    chk(seen == global_count, "every global entry accounted for");
    // with one combinatorial core, two can never write together
    if (M > 1) chk(n_comb_multi > 0, "same-clock combinatorial writes happened");
    chk(n_merge > 0, "merge of both sides in one window happened");
    chk(n_poll_skip > 0, "POLL polled an idle core");
    chk(n_sibling_wait > 0, "sibling waited for its turn");
    if (EXPECT_BACKPRESSURE) chk(n_backpressure > 0, "tree back-pressure happened");
    chk(n_fallback > 0, "box-method fallback happened");
    chk(n_halted > 0, "halt reached a core");
    end_of_run();
  end
