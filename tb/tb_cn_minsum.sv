// tb_cn_minsum - random check updates against the sorting reference model:
// random posterior LLRs, random known-edge masks and random previous
// compressed states. Compares every updated posterior LLR of the non-known
// edges and every new message rebuilt from the output state.
module tb_cn_minsum;
  import sc_ldpc_pkg::*;
  import tb_ref_pkg::*;
  app_t [DC-1:0] app_in, app_out;
  logic [DC-1:0] known;
  cn_state_t st_in, st_out;
  int checks = 0, failures = 0;

  cn_minsum dut (.app_in, .known, .st_in, .app_out, .st_out);

  function automatic int msg(cn_state_t st, int e);
    int m;
    m = (e == int'(st.idx)) ? int'(st.min2) : int'(st.min1);
    return (st.sp ^ st.sgn[e]) ? -m : m;
  endfunction

  initial begin
    int app[], r_old[], app_n[], r_n[];
    bit kn[];
    app = new[DC]; r_old = new[DC]; kn = new[DC];
    for (int it = 0; it < 5000; it++) begin
      st_in.min1 = MAG_W'($urandom_range(0, 10));
      st_in.min2 = MAG_W'(int'(st_in.min1) + $urandom_range(0, 5));
      st_in.idx  = IDX_W'($urandom_range(0, DC - 1));
      st_in.sgn  = DC'($urandom);
      st_in.sp   = ^st_in.sgn;
      if (it < 20) st_in = '0;
      for (int e = 0; e < DC; e++) begin
        app[e] = $urandom_range(0, 200) - 100;
        if (it % 3 == 0) app[e] = $urandom_range(0, 16) - 6;
        kn[e] = ($urandom_range(0, 9) == 0);
        app_in[e] = app_t'(app[e]);
        known[e] = kn[e];
        r_old[e] = msg(st_in, e);
      end
      #1;
      ref_check(DC, app, kn, r_old, app_n, r_n);
      for (int e = 0; e < DC; e++) begin
        checks++;
        if ((!kn[e] && int'(app_out[e]) != app_n[e]) || msg(st_out, e) != r_n[e]) begin
          failures++;
          if (failures < 5) $display("it %0d e %0d: app %0d/%0d msg %0d/%0d", it, e,
                                     app_out[e], app_n[e], msg(st_out, e), r_n[e]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
