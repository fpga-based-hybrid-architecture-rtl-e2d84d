// combinatorial_circuit: turns the request pattern of the writers into the
// write controls of the multi-port memory, with no scheduling.
//
// The paper's circuit takes an N-bit string, one bit per RRT core ('1' =
// the core asks to write) and maps each of the 2^N possible strings, in
// cascaded look-up tables, to the control signals of the multi-port
// memory, so that every requester writes in the same window.  Here the
// table is written as the function it holds: each granted requester p gets
// a write enable and a slot offset equal to the number of granted
// requesters below it (a prefix population count), and n_wr is the total.
// Added to the memory's fill level, the offsets give every writer its own
// consecutive address.  The `room` input (the memory can take NP more
// nodes) and the per-channel permission `allow` are this design's
// additions.
//
// Timing: purely combinational.
module combinatorial_circuit #(
  parameter int unsigned NP = 4,
  parameter int unsigned OW = (NP <= 1) ? 1 : $clog2(NP + 1)
) (
  input  logic [NP-1:0]         req,
  input  logic                  room,
  input  logic [NP-1:0]         allow,
  output logic [NP-1:0]         go,
  output logic [NP-1:0]         we,
  output logic [NP-1:0][OW-1:0] offset,
  output logic [OW-1:0]         n_wr
);
  always_comb begin
    logic [OW-1:0] acc;
    acc = '0;
    for (int p = 0; p < NP; p++) begin
      go[p]     = room && allow[p];
      we[p]     = req[p] && go[p];
      offset[p] = acc;
      acc       = acc + OW'(we[p]);
    end
    n_wr = acc;
  end
endmodule
