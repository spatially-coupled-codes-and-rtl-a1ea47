// tb_dec_engine - one engine with Z = 6: random words, shifts, masks and
// states. The reference un-rotates each word by hand (check q uses element
// (q + shift) mod Z), applies the reference check update per check and
// compares every written-back element.
module tb_dec_engine;
  import sc_ldpc_pkg::*;
  import tb_ref_pkg::*;
  localparam int Z = 6;
  app_t [Z-1:0] word_in [DC], word_out [DC];
  logic [$clog2(Z)-1:0] shift [DC];
  logic [DC-1:0] known;
  cn_state_t [Z-1:0] st_in, st_out;
  int checks = 0, failures = 0;

  dec_engine #(.Z(Z)) dut (.word_in, .shift, .known, .st_in, .word_out, .st_out);

  function automatic int msg(cn_state_t st, int e);
    int m;
    m = (e == int'(st.idx)) ? int'(st.min2) : int'(st.min1);
    return (st.sp ^ st.sgn[e]) ? -m : m;
  endfunction

  initial begin
    int app[], r_old[], app_n[], r_n[], col;
    bit kn[];
    app = new[DC]; r_old = new[DC]; kn = new[DC];
    for (int it = 0; it < 500; it++) begin
      for (int e = 0; e < DC; e++) begin
        shift[e] = $clog2(Z)'($urandom_range(0, Z - 1));
        known[e] = ($urandom_range(0, 7) == 0);
        for (int q = 0; q < Z; q++) word_in[e][q] = app_t'($urandom_range(0, 100) - 50);
      end
      for (int q = 0; q < Z; q++) begin
        st_in[q].min1 = MAG_W'($urandom_range(0, 10));
        st_in[q].min2 = MAG_W'(int'(st_in[q].min1) + $urandom_range(0, 5));
        st_in[q].idx  = IDX_W'($urandom_range(0, DC - 1));
        st_in[q].sgn  = DC'($urandom);
        st_in[q].sp   = ^st_in[q].sgn;
      end
      #1;
      for (int q = 0; q < Z; q++) begin
        for (int e = 0; e < DC; e++) begin
          col = (q + int'(shift[e])) % Z;
          app[e] = int'(word_in[e][col]);
          kn[e] = known[e];
          r_old[e] = msg(st_in[q], e);
        end
        ref_check(DC, app, kn, r_old, app_n, r_n);
        for (int e = 0; e < DC; e++) begin
          col = (q + int'(shift[e])) % Z;
          checks++;
          if ((!kn[e] && int'(word_out[e][col]) != app_n[e]) || msg(st_out[q], e) != r_n[e]) begin
            failures++;
            if (failures < 5) $display("it %0d q %0d e %0d mismatch", it, q, e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
