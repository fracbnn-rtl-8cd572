// fmap_ram - on-chip buffer with one write port and NRD read ports.
//
// Used for the MSB and LSB feature-map planes (B-bit words, NRD = 9 so a
// whole 3x3 window is read at once), for the weight buffer (P*B-bit words,
// all nine taps of one input word at once) and for the popcount buffer that
// holds O_MSB between the base and the update phase (NRD = 1).
// Writes take effect at the clock edge; reads are combinational, as from an
// array partitioned for the unrolled window. Contents are not reset: every
// word is written before it is read.
module fmap_ram #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned NRD   = 9,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  logic [W-1:0]            wdata,
  input  logic [NRD-1:0][AW-1:0]  raddr,
  output logic [NRD-1:0][W-1:0]   rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  always_comb
    for (int r = 0; r < int'(NRD); r++) rdata[r] = mem[raddr[r]];
endmodule
