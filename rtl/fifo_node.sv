// fifo_node: one FIFO level of the hierarchical tree (F.l.k in the paper).
//
// Polls its two children, which are the FIFO outputs of the level below
// (POLLs or lower FIFO nodes), one child per clock in turn, and moves the
// polled child's head word, if it has one, into its own first-word-fall-
// through FIFO (fifo_fwft), whose output is polled in turn by the level
// above.  The child-side names follow the paper's FIFO symbol
// (fifo_out_tdata_k, fifo_out_tvalid, fifo_out_tready); the registered
// fifo_in_tdata/fifo_in_tvalid stage in front of the storage also follows
// it.  Storage depth, the output stream m_* and the reset are this
// design's choices.
//
// Timing: the poll pointer advances every cycle.  A word taken from a
// child in cycle t is in the input register at t+1, in the storage at t+2
// and visible on m_tdata from t+2.
module fifo_node
  import rrt_pkg::*;
#(
  parameter int unsigned N_CHILD = 2,
  parameter int unsigned WIDTH   = NODE_W,
  parameter int unsigned DEPTH   = 16
) (
  input  logic                          aclk,
  input  logic                          aresetn,
  input  logic [N_CHILD-1:0][WIDTH-1:0] fifo_out_tdata,
  input  logic [N_CHILD-1:0]            fifo_out_tvalid,
  output logic [N_CHILD-1:0]            fifo_out_tready,
  output logic [WIDTH-1:0]              m_tdata,
  output logic                          m_tvalid,
  input  logic                          m_tready
);
  localparam int unsigned PW = clog2_min1(N_CHILD);
  logic [PW-1:0]    state;
  logic [WIDTH-1:0] fifo_in_tdata;
  logic             fifo_in_tvalid, fifo_in_tready, room;

  assign room = !fifo_in_tvalid || fifo_in_tready;

  always_comb begin
    fifo_out_tready = '0;
    fifo_out_tready[state] = room;
  end

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      state          <= '0;
      fifo_in_tvalid <= 1'b0;
      fifo_in_tdata  <= '0;
    end else begin
      state <= (state == PW'(N_CHILD - 1)) ? '0 : state + 1'b1;
      if (fifo_in_tvalid && fifo_in_tready) fifo_in_tvalid <= 1'b0;
      if (fifo_out_tvalid[state] && room) begin
        fifo_in_tdata  <= fifo_out_tdata[state];
        fifo_in_tvalid <= 1'b1;
      end
    end
  end

  fifo_fwft #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_store (
    .aclk, .aresetn,
    .s_tdata(fifo_in_tdata), .s_tvalid(fifo_in_tvalid), .s_tready(fifo_in_tready),
    .m_tdata, .m_tvalid, .m_tready);
endmodule
