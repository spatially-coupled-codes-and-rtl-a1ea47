// tb_window_ctrl - schedule of a small frame (MB = 3, W = 7, L = 5, OFF = 3,
// MU = 2) with random input stalls. Tracks the step count itself and checks
// every clock: ring slots (sub-block s in slot s mod (W+MU), row t in check
// slot t mod W), which sub-block leaves the window, both engines' rows
// (engine 1 OFF rows ahead, wrapping) and that the engines stay more than
// MU rows apart; and the frame length in clocks.
module tb_window_ctrl;
  import sc_ldpc_pkg::*;
  localparam int MB = 3, W = 7, L = 5, OFF = 3, S = W + MU, NBW = NPC * MB, NSTEP = L + S;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  logic busy, done, ld_active, ld_need_in, ld_adv, ld_out_valid, ld_stall, sw_active;
  logic [$clog2(S)-1:0] ld_slot, sw_vslot [2];
  logic [$clog2(NBW)-1:0] ld_word;
  logic [$clog2(W)-1:0] ld_crow, sw_rslot [2];
  logic [$clog2(L)-1:0] ld_out_block;
  logic [$clog2(MB)-1:0] sw_r;
  logic signed [15:0] sw_t [2];
  int checks = 0, failures = 0;

  window_ctrl #(.MB(MB), .W(W), .L(L), .OFF(OFF)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pmod(int a, int m);
    return ((a % m) + m) % m;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%t fail: %s", $time, what);
    end
  endtask

  initial begin
    int s, cyc, wcnt, clocks, stalls, tt;
    bit prev_sweep;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    s = 0; cyc = 0; wcnt = 0; clocks = 0; stalls = 0; prev_sweep = 0;
    while (!done) begin
      in_valid <= ($urandom_range(0, 3) != 0);
      #1;
      clocks++;
      if (ld_stall) stalls++;
      if (ld_active) begin
        if (prev_sweep) begin s++; wcnt = 0; end
        prev_sweep = 0;
        chk(int'(ld_slot) == s % S, "ld_slot");
        chk(int'(ld_crow) == s % W, "ld_crow");
        chk(int'(ld_word) == wcnt, "ld_word");
        chk(ld_need_in == (s < L), "need_in");
        chk(ld_out_valid == (s >= S), "out_valid");
        if (s >= S) chk(int'(ld_out_block) == s - S, "out_block");
        chk(ld_adv == (!ld_need_in || in_valid), "adv");
        if (ld_adv) wcnt++;
        cyc = 0;
      end else if (sw_active) begin
        if (!prev_sweep) chk(wcnt == NBW, "load length");
        prev_sweep = 1;
        chk(int'(sw_r) == cyc % MB, "r");
        for (int g = 0; g < 2; g++) begin
          tt = s - W + 1 + ((cyc / MB + g * OFF) % W);
          chk(int'(sw_t[g]) == tt, "t");
          chk(int'(sw_rslot[g]) == pmod(tt, W), "rslot");
          chk(int'(sw_vslot[g]) == pmod(tt, S), "vslot");
        end
        tt = int'(sw_t[0]) - int'(sw_t[1]);
        chk(tt > MU || tt < -MU, "engine distance");
        cyc++;
      end
      @(posedge clk);
      if (clocks > 1000000) break;
    end
    chk(s == NSTEP - 1, "steps");
    $display("clocks %0d stalls %0d expected %0d", clocks, stalls,
             NSTEP * NBW + (NSTEP - 1) * W * MB + stalls);
    chk(clocks == NSTEP * NBW + (NSTEP - 1) * W * MB + stalls + 1, "frame length");
    chk(stalls > 0, "stalls seen");
    #1 chk(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
