// poll: lowest level of the hierarchical tree, serving two RRT cores.
//
// As in the paper, POLL is a small sequential state machine that polls its
// child cores in turn, one child per rising clock edge (P0 polls RRT0 and
// RRT1, P1 polls RRT2 and RRT3, ...).  The polled child, if it holds a node,
// captures the bus and hands the node over with the core's write-acknowledge
// handshake; the node goes into a register that feeds the input of the
// FIFO above (fifo_in_tdata / fifo_in_tvalid, AXI-stream style).  The port
// names follow the paper's symbol; the fifo_in_tready input, the reset and
// the width parameter are additions of this design (the paper's symbol was
// drawn at a 1-bit data width).
//
// Timing: the poll pointer advances every cycle whatever happens, so a
// child waits at most N_CHILD-1 cycles for its turn.  go[k] is high when
// child k is polled and the output register is free or being emptied this
// cycle; a node acknowledged in cycle t is valid on fifo_in_* from t+1.
module poll
  import rrt_pkg::*;
#(
  parameter int unsigned N_CHILD = 2,
  parameter int unsigned WIDTH   = NODE_W
) (
  input  logic                           aclk,
  input  logic                           aresetn,
  input  logic [N_CHILD-1:0]             ready,
  input  logic [N_CHILD-1:0]             ack,
  input  logic [N_CHILD-1:0][WIDTH-1:0]  output_string,
  output logic [N_CHILD-1:0]             go,
  output logic [WIDTH-1:0]               fifo_in_tdata,
  output logic                           fifo_in_tvalid,
  input  logic                           fifo_in_tready
);
  localparam int unsigned PW = clog2_min1(N_CHILD);
  logic [PW-1:0] state;
  logic          room;

  assign room = !fifo_in_tvalid || fifo_in_tready;

  always_comb begin
    go = '0;
    go[state] = room;
  end

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      state          <= '0;
      fifo_in_tvalid <= 1'b0;
      fifo_in_tdata  <= '0;
    end else begin
      state <= (state == PW'(N_CHILD - 1)) ? '0 : state + 1'b1;
      if (fifo_in_tvalid && fifo_in_tready) fifo_in_tvalid <= 1'b0;
      if (ack[state] && go[state]) begin
        fifo_in_tdata  <= output_string[state];
        fifo_in_tvalid <= 1'b1;
      end
    end
  end

  // only the polled child may acknowledge; a child acknowledges only when ready
  a_ack_polled: assert property (@(posedge aclk) disable iff (!aresetn) (ack & ~go) == '0);
  a_ack_ready:  assert property (@(posedge aclk) disable iff (!aresetn) (ack & ~ready) == '0);
endmodule
