// multiport_memory: global address space built from NW single-channel banks.
//
// As in the paper, the multi-port memory is a heap of NW distributed
// memories, one per writer, each holding 1/NW of the total, with
// asynchronous read and write channels and auxiliary multiplexers that map
// the global address space onto the banks.  The mapping chosen here is
// low-order interleaving: global address a lives in bank a mod NW at local
// address a div NW.  The combinatorial circuit hands the writers of one
// window consecutive addresses, so they always fall into different banks
// and all NW writes complete in the same clock.  Each word holds F 32-bit
// state words (x, y, theta, ...).  Each read channel sees every bank through
// its own multiplexer (the distributed memories are read asynchronously,
// one read port per channel).
//
// Timing: writes take effect at the clock edge; reads are combinational.
// An address at or above DEPTH reads as zero and is never written.
module multiport_memory #(
  parameter int unsigned NW    = 4,       // write channels = banks
  parameter int unsigned NR    = 4,       // read channels
  parameter int unsigned WIDTH = 96,      // F * 32
  parameter int unsigned DEPTH = 102400   // words in the global space
) (
  input  logic                     aclk,
  input  logic [NW-1:0]            we,
  input  logic [NW-1:0][31:0]      waddr,
  input  logic [NW-1:0][WIDTH-1:0] wdata,
  input  logic [NR-1:0][31:0]      raddr,
  output logic [NR-1:0][WIDTH-1:0] rdata
);
  localparam int unsigned DB = (DEPTH + NW - 1) / NW;   // words per bank
  localparam int unsigned LW = (DB <= 2) ? 1 : $clog2(DB);

  logic [NR-1:0][NW-1:0][WIDTH-1:0] bank_rd;

  for (genvar b = 0; b < NW; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DB];
    logic             bwe;
    logic [LW-1:0]    baddr;
    logic [WIDTH-1:0] bdata;

    // write-channel multiplexer: the writer whose address maps to this bank
    always_comb begin
      bwe   = 1'b0;
      baddr = '0;
      bdata = '0;
      for (int p = 0; p < NW; p++) begin
        if (we[p] && (waddr[p] < DEPTH) && (waddr[p] % NW == b)) begin
          bwe   = 1'b1;
          baddr = LW'(waddr[p] / NW);
          bdata = wdata[p];
        end
      end
    end

    always_ff @(posedge aclk) begin
      if (bwe) mem[baddr] <= bdata;
    end

    for (genvar r = 0; r < NR; r++) begin : g_rd
      logic [31:0] la;
      assign la = raddr[r] / NW;
      assign bank_rd[r][b] = (la < DB) ? mem[LW'(la)] : '0;
    end
  end

  // read-channel multiplexers
  always_comb begin
    for (int r = 0; r < NR; r++) begin
      rdata[r] = '0;
      if (raddr[r] < DEPTH) rdata[r] = bank_rd[r][raddr[r] % NW];
    end
  end
endmodule
