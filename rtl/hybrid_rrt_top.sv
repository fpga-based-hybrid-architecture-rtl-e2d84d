// hybrid_rrt_top: hybrid parallel-RRT accelerator, N cores of which M are
// combinatorial and N-M hierarchical.
//
// Cores 0 .. M-1 write through an inner combinatorial block (a
// combinatorial circuit plus an M-bank multi-port memory): every one of
// them can store a node in the same clock, and they all search that shared
// memory for their nearest nodes.  Cores M .. N-1 hand their nodes to the
// POLL/FIFO binary tree of the hierarchical block, which funnels them into
// one stream.  A global combinatorial block with M+1 write channels (the
// paper's M+1 combinatorial blocks) merges the M combinatorial cores' nodes
// and the tree's stream into the global road-map in one window; the
// hierarchical cores search that global map.  The split M against N-M
// follows the paper's cost function; the defaults N = 64, M = 4 are the
// largest M whose predicted power, by the paper's fitted curves, stays
// within the 17.3 W the paper measured for its N = 64 hybrid.
//
// An exploration ends when the global map holds TARGET nodes (the paper's
// task adds 10,000 nodes): every core is halted, `done` rises and `irq`
// pulses, and `cycles` holds the clock count of the run (the paper times
// runs with an interrupt-driven counter).  Start states and generator
// seeds come from outside (the paper seeds with a modified K-means on the
// host); `host_raddr`/`host_rdata` read the global map.
//
// Timing: a combinatorial core's node is in both memories one clock after
// its acknowledge; a hierarchical core's node needs at least
// 3 + 2*log2(LP) clocks through the tree.
module hybrid_rrt_top
  import rrt_pkg::*;
#(
  parameter int unsigned N          = 64,
  parameter int unsigned M          = 4,
  parameter int unsigned F          = 3,
  parameter int unsigned DEPTH      = 102400,   // 400*F KB of F*32-bit words
  parameter int unsigned TARGET     = 10000,
  parameter int unsigned MAP_W      = 512,
  parameter int unsigned MAP_H      = 512,
  parameter int unsigned BOX        = 32,
  parameter logic [31:0] STEP       = 32'h0000_0800,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                  aclk,
  input  logic                  aresetn,
  input  logic [N-1:0][31:0]    start_column,
  input  logic [N-1:0][31:0]    start_row,
  input  logic [N-1:0][63:0]    rand_seed,
  input  logic [31:0]           host_raddr,
  output logic [F*32-1:0]       host_rdata,
  output logic [31:0]           global_count,
  output logic [31:0]           comb_count,
  output logic [N-1:0]          rrt_done,
  output logic                  done,
  output logic                  irq,
  output logic [31:0]           cycles
);
  localparam int unsigned H  = N - M;
  localparam int unsigned NR = H + 1;   // hierarchical cores + host

  // per-core buses
  logic [N-1:0]             go, ack, ready, sel;
  logic [N-1:0][NODE_W-1:0] node;
  logic [N-1:0][31:0]       rd_i, rd_col, rd_row, rd_theta, rd_count;
  logic                     halt;

  for (genvar c = 0; c < N; c++) begin : g_core
    logic [31:0] box_no, increment;
    rrt_module #(.RRT_ID(c), .MAP_W(MAP_W), .MAP_H(MAP_H), .BOX(BOX), .STEP(STEP)) u_rrt (
      .aclk, .aresetn, .go(go[c]), .halt,
      .rand_input(rand_seed[c]), .start_column(start_column[c]), .start_row(start_row[c]),
      .count(rd_count[c]), .array_column(rd_col[c]), .array_row(rd_row[c]),
      .array_theta(rd_theta[c]), .i(rd_i[c]), .box_no, .increment,
      .output_string(node[c]), .ack(ack[c]), .ready(ready[c]),
      .rrt_done(rrt_done[c]), .select(sel[c]));
  end

  // ---------------- combinatorial side ----------------
  logic              inner_room, global_room;
  logic [M-1:0]      inner_go, inner_we;
  logic [M-1:0][31:0] inner_raddr, inner_col, inner_row, inner_theta;
  logic [M-1:0][F*32-1:0] inner_rdata;

  for (genvar c = 0; c < M; c++) begin : g_comb_rd
    assign inner_raddr[c] = rd_i[c];
    assign rd_col[c]      = inner_col[c];
    assign rd_row[c]      = inner_row[c];
    assign rd_theta[c]    = inner_theta[c];
    assign rd_count[c]    = comb_count;
    assign go[c]          = inner_go[c];
  end

  combinatorial_block #(.NP(M), .NR(M), .F(F), .DEPTH(DEPTH)) u_inner (
    .aclk, .aresetn, .req(ready[M-1:0]), .wnode(node[M-1:0]),
    .allow({M{global_room && !halt}}), .go(inner_go), .room(inner_room),
    .count(comb_count), .we(inner_we),
    .raddr(inner_raddr), .rdata(inner_rdata),
    .rcol(inner_col), .rrow(inner_row), .rtheta(inner_theta));

  // ---------------- hierarchical side ----------------
  logic [NODE_W-1:0] hier_tdata;
  logic              hier_tvalid, hier_tready;

  hierarchical_block #(.H(H), .WIDTH(NODE_W), .DEPTH(FIFO_DEPTH)) u_hier (
    .aclk, .aresetn, .ready(ready[N-1:M]), .ack(ack[N-1:M]),
    .output_string(node[N-1:M]), .go(go[N-1:M]),
    .m_tdata(hier_tdata), .m_tvalid(hier_tvalid), .m_tready(hier_tready));

  // ---------------- global road-map ----------------
  logic [M:0]              g_req, g_allow, g_go, g_we;
  logic [M:0][NODE_W-1:0]  g_node;
  logic [NR-1:0][31:0]     g_raddr, g_col, g_row, g_theta;
  logic [NR-1:0][F*32-1:0] g_rdata;

  assign g_req   = {hier_tvalid, ready[M-1:0]};
  assign g_node  = {hier_tdata, node[M-1:0]};
  assign g_allow = {!halt, {M{inner_room && !halt}}};
  assign hier_tready = g_go[M];

  for (genvar c = M; c < N; c++) begin : g_hier_rd
    assign g_raddr[c-M] = rd_i[c];
    assign rd_col[c]    = g_col[c-M];
    assign rd_row[c]    = g_row[c-M];
    assign rd_theta[c]  = g_theta[c-M];
    assign rd_count[c]  = global_count;
  end
  assign g_raddr[H]  = host_raddr;
  assign host_rdata  = g_rdata[H];

  combinatorial_block #(.NP(M+1), .NR(NR), .F(F), .DEPTH(DEPTH)) u_global (
    .aclk, .aresetn, .req(g_req), .wnode(g_node), .allow(g_allow),
    .go(g_go), .room(global_room), .count(global_count), .we(g_we),
    .raddr(g_raddr), .rdata(g_rdata), .rcol(g_col), .rrow(g_row), .rtheta(g_theta));

  // ---------------- run control and cycle counter ----------------
  assign halt = done;

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      done   <= 1'b0;
      irq    <= 1'b0;
      cycles <= '0;
    end else begin
      irq <= 1'b0;
      if (!done) begin
        cycles <= cycles + 1;
        if (global_count >= TARGET) begin
          done <= 1'b1;
          irq  <= 1'b1;
        end
      end
    end
  end

  // a combinatorial core's node enters both memories or neither
  a_comb_both: assert property (@(posedge aclk) disable iff (!aresetn)
    inner_we == g_we[M-1:0]);
endmodule
