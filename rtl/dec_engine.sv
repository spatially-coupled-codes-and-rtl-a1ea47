// dec_engine - one decoding engine of the windowed decoder.
//
// Per clock it updates one block row of the parity-check matrix: the Z check
// nodes that share one row of Z x Z circulant permutation matrices. Each of
// the DC circulants of that block row touches one memory word of Z posterior
// LLRs; check q of the block row uses element (q + shift) mod Z of that word.
// The engine rotates the DC input words accordingly, runs Z cn_minsum units
// side by side and rotates the results back, so the memory writes back whole
// words. Because the Z checks of one circulant row touch distinct variables,
// the Z updates are independent and can be done in the same clock.
//
// Processing a whole circulant row per clock is this design's choice of
// parallelism; the publication only fixes the circulant size Z = 30 and that
// two such engines run in parallel. Purely combinational: memory read,
// update and write-back happen in one clock around it.
module dec_engine import sc_ldpc_pkg::*; #(
  parameter int Z = 30
) (
  input  app_t      [Z-1:0] word_in  [DC],
  input  logic      [$clog2(Z)-1:0] shift [DC],
  input  logic      [DC-1:0] known,
  input  cn_state_t [Z-1:0] st_in,
  output app_t      [Z-1:0] word_out [DC],
  output cn_state_t [Z-1:0] st_out
);

  app_t [DC-1:0] cn_in  [Z];
  app_t [DC-1:0] cn_out [Z];

  // element q of the rotated view is element (q + shift) mod Z of the word
  function automatic int rot(int q, int sh);
    return (q + sh >= Z) ? q + sh - Z : q + sh;
  endfunction

  always_comb begin
    for (int q = 0; q < Z; q++)
      for (int e = 0; e < DC; e++)
        cn_in[q][e] = word_in[e][rot(q, int'(shift[e]))];
  end

  for (genvar q = 0; q < Z; q++) begin : g_cn
    cn_minsum u_cn (
      .app_in  (cn_in[q]),
      .known   (known),
      .st_in   (st_in[q]),
      .app_out (cn_out[q]),
      .st_out  (st_out[q])
    );
  end

  // inverse rotation: element c of the word comes from check (c - shift) mod Z
  function automatic int unrot(int c, int sh);
    return (c >= sh) ? c - sh : c - sh + Z;
  endfunction

  always_comb begin
    for (int e = 0; e < DC; e++)
      for (int c = 0; c < Z; c++)
        word_out[e][c] = cn_out[unrot(c, int'(shift[e]))][e];
  end

endmodule
