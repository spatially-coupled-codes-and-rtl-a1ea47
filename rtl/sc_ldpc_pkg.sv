// sc_ldpc_pkg - constants, types and code-structure functions shared by the
// spatially coupled LDPC evaluation platform.
//
// The code is the rapidly converging weakly coupled code ("Code A"): syndrome
// former memory MU = 2, every sub-matrix H_i lifted from the 1x5 protograph
// row (2 1 1 1 1), so each check node has 6 edges per sub-matrix and
// d_c = 18 edges in total; variable nodes of protograph column 0 have degree 6,
// the others degree 3 (20 % / 80 %), and the rate is 4/5. Lifting uses Z x Z
// circulant permutation matrices (Z = 30 in the default configuration).
//
// The published description fixes the protograph, the circulant size and the
// degree profile but not the circulant positions and shifts. The functions
// edge_colblock() and edge_shift() below are this design's own fixed formula
// for them (not optimised for girth). They are evaluated only at elaboration
// time, to fill small look-up tables in the decoder.
//
// Number formats (not given in the publication, chosen here):
//   channel LLR   : LLR_W = 4 bit two's complement, 15 levels -7..+7
//   posterior LLR : APP_W = 8 bit two's complement, +-127
//   message       : |Q| clipped to QMAG_MAX = 20, scaled by 0.75, so a stored
//                   magnitude fits MAG_W = 4 bits (at most 15)
// The posterior never saturates: 7 + 6 * 15 = 97 < 127 for the degree-6
// variables. That matters in layered decoding, where the posterior must stay
// equal to the channel LLR plus the sum of the stored messages; a saturating
// posterior loses part of that sum and can later flip a correct bit.
package sc_ldpc_pkg;

  localparam int MU      = 2;              // syndrome former memory
  localparam int NPC     = 5;              // protograph columns per sub-matrix
  localparam int EPH     = 6;              // edges of one check in one H_i
  localparam int DC      = (MU + 1) * EPH; // check node degree, 18
  localparam int IDX_W   = $clog2(DC);     // ceil(log2 d_c)

  localparam int LLR_W   = 4;
  localparam int LLR_MAX = 7;
  localparam int APP_W    = 8;
  localparam int APP_MAX  = 127;
  localparam int QMAG_MAX = 20;
  localparam int MAG_W    = 4;

  typedef logic signed [LLR_W-1:0] llr_t;
  typedef logic signed [APP_W-1:0] app_t;

  // Compressed check-node state: two magnitudes, d_c+1 sign bits and the
  // index of the smallest input (min-sum storage of a layered decoder).
  typedef struct packed {
    logic [MAG_W-1:0] min1;   // scaled smallest |Q|
    logic [MAG_W-1:0] min2;   // scaled second smallest |Q|
    logic [IDX_W-1:0] idx;    // edge holding min1
    logic             sp;     // product (xor) of all input signs
    logic [DC-1:0]    sgn;    // sign of each edge's input, 1 = negative
  } cn_state_t;

  // Edge e (0..DC-1) of a check row: e / EPH selects H_i (the variable
  // sub-block offset i); inside H_i, slot 0 and 1 are the two copies of the
  // weight-2 protograph column 0, slots 2..5 the columns 1..4.
  function automatic int edge_sub(int e);
    return e / EPH;
  endfunction

  function automatic int edge_pcol(int e);
    return (e % EPH < 2) ? 0 : (e % EPH) - 1;
  endfunction

  function automatic int edge_copy(int e);
    return (e % EPH == 1) ? 1 : 0;
  endfunction

  // Circulant column block (0 .. NPC*mb-1) hit by edge e of block row r.
  // The two copies of column 0 differ by mb/2, so they never collide.
  function automatic int edge_colblock(int e, int r, int mb);
    int i, p, k;
    i = edge_sub(e);
    p = edge_pcol(e);
    k = edge_copy(e);
    return p * mb + (r + 7 * i + 13 * p + k * (mb / 2)) % mb;
  endfunction

  // Cyclic shift of the circulant of edge e in block row r: check q of the
  // block row is connected to column (q + shift) mod z of the column block.
  function automatic int edge_shift(int e, int r, int z);
    int i, p, k;
    i = edge_sub(e);
    p = edge_pcol(e);
    k = edge_copy(e);
    return (r * (2 * p + 1) + 5 * i + 11 * k + 3 * p * i) % z;
  endfunction

  // Saturate an integer to +-lim.
  function automatic int sat(int v, int lim);
    return (v > lim) ? lim : ((v < -lim) ? -lim : v);
  endfunction

  // Scaling by 0.75 with rounding to nearest.
  function automatic int scale075(int mag);
    return (3 * mag + 2) >>> 2;
  endfunction

endpackage
