// tb_ref_pkg - reference models used by the testbenches, written
// independently of the RTL: the taus88 recurrence and a straightforward
// layered scaled min-sum check update that sorts magnitudes instead of
// tracking two running minima.
package tb_ref_pkg;

  // one taus88 step on a state of three 32-bit words; returns the output
  function automatic logic [31:0] taus_out(logic [31:0] a, logic [31:0] b, logic [31:0] c);
    return a ^ b ^ c;
  endfunction

  function automatic void taus_step(ref logic [31:0] a, ref logic [31:0] b, ref logic [31:0] c);
    logic [31:0] t;
    t = ((a << 13) ^ a) >> 19;  a = ((a & 32'hFFFFFFFE) << 12) ^ t;
    t = ((b << 2) ^ b) >> 25;   b = ((b & 32'hFFFFFFF8) << 4) ^ t;
    t = ((c << 3) ^ c) >> 11;   c = ((c & 32'hFFFFFFF0) << 17) ^ t;
  endfunction

  function automatic int clip(int v, int lim);
    if (v > lim) return lim;
    if (v < -lim) return -lim;
    return v;
  endfunction

  function automatic int sc75(int x);
    // 0.75 * x rounded to nearest, halves up
    return int'($floor(real'(x) * 0.75 + 0.5));
  endfunction

  // Reference check update. r_old/r_new are the explicit messages (not the
  // compressed state); known edges enter with +127, magnitudes are clipped to 20 and are left unchanged.
  function automatic void ref_check(input int dc, input int app[], input bit known[],
                                    input int r_old[], output int app_new[], output int r_new[]);
    int q[], mags[], order[], tmp, neg;
    q = new[dc]; mags = new[dc]; order = new[dc]; app_new = new[dc]; r_new = new[dc];
    for (int e = 0; e < dc; e++) begin
      q[e] = known[e] ? 127 : clip(app[e] - r_old[e], 127);
      mags[e] = (q[e] < 0) ? -q[e] : q[e];
      if (mags[e] > 20) mags[e] = 20;
      order[e] = e;
    end
    // stable selection sort of edge indices by magnitude
    for (int a = 0; a < dc; a++)
      for (int b = a + 1; b < dc; b++)
        if (mags[order[b]] < mags[order[a]] ||
            (mags[order[b]] == mags[order[a]] && order[b] < order[a])) begin
          tmp = order[a]; order[a] = order[b]; order[b] = tmp;
        end
    for (int e = 0; e < dc; e++) begin
      neg = 0;
      for (int f = 0; f < dc; f++) if (f != e && q[f] < 0) neg ^= 1;
      r_new[e] = sc75((e == order[0]) ? mags[order[1]] : mags[order[0]]);
      if (neg) r_new[e] = -r_new[e];
      app_new[e] = known[e] ? app[e] : clip(q[e] + r_new[e], 127);
    end
  endfunction

endpackage
