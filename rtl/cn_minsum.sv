// cn_minsum - layered scaled min-sum update of one check node (d_c = DC).
//
// Layered decoding keeps one posterior LLR per variable and, per check, the
// message it last sent on every edge. This unit performs one check update:
//   1. rebuild the old check-to-variable messages R_e from the compressed
//      state (magnitude min1, or min2 on the edge idx; sign = sp ^ sgn[e]),
//   2. Q_e = APP_e - R_e   (variable-to-check message),
//   3. find the two smallest |Q_e| (clipped to QMAG_MAX = 20), the index of
//      the smallest and all signs,
//   4. scale both minima by 0.75 (constant scaling factor) and store them,
//   5. APP_e' = Q_e + R_e' with the new messages R_e'.
// The state is the storage the publication counts per check node: two
// multi-level values, d_c + 1 sign bits and one index of ceil(log2 d_c)
// bits. The scaling factor 0.75, the rounding and all widths are this
// design's choices.
//
// Edges flagged in `known` lead to termination positions (bits known to be
// zero): they enter with Q = +APP_MAX and their app_out must not be written back.
// A cleared state (all zeros) means "no message yet" (all R_e = 0).
// Purely combinational.
module cn_minsum import sc_ldpc_pkg::*; (
  input  app_t [DC-1:0] app_in,
  input  logic [DC-1:0] known,
  input  cn_state_t     st_in,
  output app_t [DC-1:0] app_out,
  output cn_state_t     st_out
);

  int q    [DC];
  int mag  [DC];
  int m1, m2, mi, s1, s2, r_old, r_new;
  logic [DC-1:0] sg;

  always_comb begin
    m1 = QMAG_MAX + 1;
    m2 = QMAG_MAX + 1;
    mi = 0;
    for (int e = 0; e < DC; e++) begin
      r_old = (e == int'(st_in.idx)) ? int'(st_in.min2) : int'(st_in.min1);
      if (st_in.sp ^ st_in.sgn[e]) r_old = -r_old;
      q[e]   = known[e] ? APP_MAX : sat(int'(app_in[e]) - r_old, APP_MAX);
      mag[e] = (q[e] < 0) ? -q[e] : q[e];
      if (mag[e] > QMAG_MAX) mag[e] = QMAG_MAX;
      sg[e]  = (q[e] < 0);
      if (mag[e] < m1) begin
        m2 = m1;
        m1 = mag[e];
        mi = e;
      end else if (mag[e] < m2) begin
        m2 = mag[e];
      end
    end
    s1 = scale075(m1);
    s2 = scale075(m2);
    st_out.min1 = MAG_W'(s1);
    st_out.min2 = MAG_W'(s2);
    st_out.idx  = IDX_W'(mi);
    st_out.sp   = ^sg;
    st_out.sgn  = sg;
    for (int e = 0; e < DC; e++) begin
      r_new = (e == mi) ? s2 : s1;
      if (st_out.sp ^ sg[e]) r_new = -r_new;
      app_out[e] = app_t'(sat(q[e] + r_new, APP_MAX));
    end
  end

endmodule
