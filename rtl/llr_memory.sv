// llr_memory - posterior LLR memory of the windowed decoder.
//
// Holds the window's W+MU sub-blocks of n posterior LLRs, organised as
// DEPTH words of Z LLRs (one word per circulant column block), in a ring:
// sub-block b lives in slot b mod (W+MU). It has NP independent ports, one
// per circulant edge of each engine (2 x 18 = 36 by default). Reads are
// asynchronous, writes take effect at the clock edge, so an engine reads,
// updates and writes back a word within one clock. The decoder's schedule
// guarantees that no two ports write the same word in one clock. The
// organisation and port count are this design's choices.
module llr_memory import sc_ldpc_pkg::*; #(
  parameter int Z     = 30,
  parameter int DEPTH = 3750,
  parameter int NP    = 2 * DC,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic     [AW-1:0] raddr [NP],
  output app_t     [Z-1:0]  rdata [NP],
  input  logic     [NP-1:0] we,
  input  logic     [AW-1:0] waddr [NP],
  input  app_t     [Z-1:0]  wdata [NP]
);

  app_t [Z-1:0] mem [DEPTH];

  always_comb begin
    for (int p = 0; p < NP; p++) rdata[p] = mem[raddr[p]];
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++)
      if (we[p]) mem[waddr[p]] <= wdata[p];
  end

endmodule
