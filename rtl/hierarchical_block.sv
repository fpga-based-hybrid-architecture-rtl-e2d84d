// hierarchical_block: the POLL/FIFO binary tree serving the hierarchical cores.
//
// Collects the nodes of H RRT cores into one stream, as in the paper's
// hierarchical architecture: at the bottom, POLL p polls cores 2p and 2p+1
// and writes into its own FIFO; above it, each FIFO node polls two FIFOs of
// the level below (F.0.0 polls P0 and P1, F.1.0 polls F.0.0 and F.0.1, ...),
// up to a single root FIFO whose output leaves the block, as the hybrid
// drawing shows it.  Polling by the parent keeps the data consistent; the
// waiting between siblings is the cost the paper attributes to this
// architecture.
//
// The tree is built for the next power of two of POLLs; POLL positions with
// no core are left out and their FIFO reads as empty.  Tree nodes are held
// in heap order: node 1 is the root, node n has children 2n and 2n+1, and
// nodes LP .. 2LP-1 are the POLL FIFOs.  FIFO depth is this design's choice.
//
// Timing: a node acknowledged by a core in cycle t reaches the root output
// no earlier than t + 2 + 2*log2(LP) cycles.
module hierarchical_block
  import rrt_pkg::*;
#(
  parameter int unsigned H     = 60,      // hierarchical cores, N - M
  parameter int unsigned WIDTH = NODE_W,
  parameter int unsigned DEPTH = 16
) (
  input  logic                    aclk,
  input  logic                    aresetn,
  input  logic [H-1:0]            ready,
  input  logic [H-1:0]            ack,
  input  logic [H-1:0][WIDTH-1:0] output_string,
  output logic [H-1:0]            go,
  output logic [WIDTH-1:0]        m_tdata,
  output logic                    m_tvalid,
  input  logic                    m_tready
);
  localparam int unsigned NPOLL = (H + 1) / 2;
  localparam int unsigned LP    = (NPOLL <= 1) ? 1 : (1 << $clog2(NPOLL));

  logic [2*LP-1:0]            rdy_p, ack_p, go_p;
  logic [2*LP-1:0][WIDTH-1:0] str_p;
  logic [2*LP-1:0][WIDTH-1:0] td;
  logic [2*LP-1:0]            tv, tr;

  for (genvar k = 0; k < 2 * LP; k++) begin : g_pad
    if (k < H) begin : g_core
      assign rdy_p[k] = ready[k];
      assign ack_p[k] = ack[k];
      assign str_p[k] = output_string[k];
      assign go[k]    = go_p[k];
    end else begin : g_none
      assign rdy_p[k] = 1'b0;
      assign ack_p[k] = 1'b0;
      assign str_p[k] = '0;
    end
  end

  for (genvar p = 0; p < LP; p++) begin : g_poll
    if (2 * p < H) begin : g_used
      logic [WIDTH-1:0] pd;
      logic             pv, pr;
      poll #(.N_CHILD(2), .WIDTH(WIDTH)) u_poll (
        .aclk, .aresetn,
        .ready(rdy_p[2*p +: 2]), .ack(ack_p[2*p +: 2]),
        .output_string(str_p[2*p +: 2]), .go(go_p[2*p +: 2]),
        .fifo_in_tdata(pd), .fifo_in_tvalid(pv), .fifo_in_tready(pr));
      fifo_fwft #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_pfifo (
        .aclk, .aresetn,
        .s_tdata(pd), .s_tvalid(pv), .s_tready(pr),
        .m_tdata(td[LP+p]), .m_tvalid(tv[LP+p]), .m_tready(tr[LP+p]));
    end else begin : g_unused
      assign go_p[2*p +: 2] = '0;
      assign td[LP+p] = '0;
      assign tv[LP+p] = 1'b0;
    end
  end

  for (genvar n = 1; n < LP; n++) begin : g_fnode
    fifo_node #(.N_CHILD(2), .WIDTH(WIDTH), .DEPTH(DEPTH)) u_fnode (
      .aclk, .aresetn,
      .fifo_out_tdata(td[2*n +: 2]), .fifo_out_tvalid(tv[2*n +: 2]),
      .fifo_out_tready(tr[2*n +: 2]),
      .m_tdata(td[n]), .m_tvalid(tv[n]), .m_tready(tr[n]));
  end

  assign td[0]    = '0;
  assign tv[0]    = 1'b0;
  assign m_tdata  = td[1];
  assign m_tvalid = tv[1];
  assign tr[1]    = m_tready;
  assign tr[0]    = 1'b0;
endmodule
