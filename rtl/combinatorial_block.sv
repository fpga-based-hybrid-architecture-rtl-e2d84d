// combinatorial_block: a combinatorial circuit in front of a multi-port
// memory, the pair the paper calls a combinatorial block.
//
// NP writers (RRT cores, or a stream from the hierarchical tree) present
// 320-bit node records with a request bit each.  The combinatorial circuit
// grants all of them at once whenever the memory has room for NP more
// nodes, and gives each granted writer a consecutive address above the
// current fill level `count`; the multi-port memory stores the first F
// words of each record (x, y, theta; further state words are zero) in the
// same clock.  NR asynchronous read channels return the stored state to
// the cores' nearest-node searches (column, row and theta words) or to a
// host.  The fill counter, the `room` rule and the `allow` inputs are this
// design's own.
//
// Timing: a write granted in cycle t (req && go) is readable, and counted
// in `count`, from t+1.  go does not depend on req, so a core's
// combinational acknowledge cannot form a loop through this block.
module combinatorial_block
  import rrt_pkg::*;
#(
  parameter int unsigned NP    = 4,
  parameter int unsigned NR    = 4,
  parameter int unsigned F     = 3,
  parameter int unsigned DEPTH = 102400
) (
  input  logic                     aclk,
  input  logic                     aresetn,
  input  logic [NP-1:0]            req,
  input  logic [NP-1:0][NODE_W-1:0] wnode,
  input  logic [NP-1:0]            allow,
  output logic [NP-1:0]            go,
  output logic                     room,
  output logic [31:0]              count,
  output logic [NP-1:0]            we,
  input  logic [NR-1:0][31:0]      raddr,
  output logic [NR-1:0][F*32-1:0]  rdata,
  output logic [NR-1:0][31:0]      rcol,
  output logic [NR-1:0][31:0]      rrow,
  output logic [NR-1:0][31:0]      rtheta
);
  localparam int unsigned OW = (NP <= 1) ? 1 : $clog2(NP + 1);

  logic [NP-1:0][OW-1:0]   offset;
  logic [OW-1:0]           n_wr;
  logic [NP-1:0][31:0]     waddr;
  logic [NP-1:0][F*32-1:0] wdata;

  assign room = (64'(count) + 64'(NP)) <= 64'(DEPTH);

  combinatorial_circuit #(.NP(NP), .OW(OW)) u_circuit (
    .req, .room, .allow, .go, .we, .offset, .n_wr);

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      node_t n;
      n        = node_t'(wnode[p]);
      waddr[p] = count + 32'(offset[p]);
      for (int w = 0; w < F; w++)
        wdata[p][w*32 +: 32] = (w == 0) ? n.x : (w == 1) ? n.y : (w == 2) ? n.theta : '0;
    end
    for (int r = 0; r < NR; r++) begin
      rcol[r] = '0; rrow[r] = '0; rtheta[r] = '0;
      for (int w = 0; w < F; w++) begin
        if (w == 0) rcol[r]   = rdata[r][w*32 +: 32];
        if (w == 1) rrow[r]   = rdata[r][w*32 +: 32];
        if (w == 2) rtheta[r] = rdata[r][w*32 +: 32];
      end
    end
  end

  multiport_memory #(.NW(NP), .NR(NR), .WIDTH(F*32), .DEPTH(DEPTH)) u_mem (
    .aclk, .we, .waddr, .wdata, .raddr, .rdata);

  always_ff @(posedge aclk) begin
    if (!aresetn) count <= '0;
    else          count <= count + 32'(n_wr);
  end

  a_no_overfill: assert property (@(posedge aclk) disable iff (!aresetn) count <= DEPTH);
endmodule
