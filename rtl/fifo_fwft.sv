// fifo_fwft: first-word-fall-through FIFO, the storage of each FIFO level.
//
// The paper builds these FIFOs from the FPGA's built-in FIFO resources in
// first-word-fall-through mode; this is a plain synthesizable equivalent
// (a circular buffer over an array).  The head word is visible on m_tdata
// whenever m_tvalid is high, without a read request; a transfer happens on
// each side when valid and ready are both high (AXI-stream rules).  The
// depth is this design's choice.
//
// Timing: a word written in cycle t is visible at the output from t+1.
// s_tready is low only when the FIFO holds DEPTH words.
module fifo_fwft #(
  parameter int unsigned WIDTH = 320,
  parameter int unsigned DEPTH = 16
) (
  input  logic             aclk,
  input  logic             aresetn,
  input  logic [WIDTH-1:0] s_tdata,
  input  logic             s_tvalid,
  output logic             s_tready,
  output logic [WIDTH-1:0] m_tdata,
  output logic             m_tvalid,
  input  logic             m_tready
);
  localparam int unsigned AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      used;
  logic             push, pop;

  assign s_tready = (used != (AW+1)'(DEPTH));
  assign m_tvalid = (used != '0);
  assign m_tdata  = mem[rptr];
  assign push     = s_tvalid && s_tready;
  assign pop      = m_tvalid && m_tready;

  always_ff @(posedge aclk) begin
    if (push) mem[wptr] <= s_tdata;
  end

  always_ff @(posedge aclk) begin
    if (!aresetn) begin
      wptr <= '0; rptr <= '0; used <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      used <= used + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge aclk) disable iff (!aresetn) used <= (AW+1)'(DEPTH));
endmodule
