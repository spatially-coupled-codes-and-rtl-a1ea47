// tb_windowed_decoder - decoder at a reduced size (Z = 6, MB = 4, W = 7,
// OFF = 3, L = 10: sub-blocks of 120 bits, 24 checks per row). Runs frames of
// the all-zero and the all-one code word (all-one is a code word because
// every check row has an even number of edges inside the frame) with weak
// wrong-signed LLRs sprinkled in, with and without random input stalls.
// Checks: every decoded bit, that the decisions leave in sub-block and word
// order exactly once, that channel errors were corrected, and the frame
// length in clocks: (L+W+MU)*n/Z + (L+W+MU-1)*W*m/Z plus stalls.
module tb_windowed_decoder;
  import sc_ldpc_pkg::*;
  localparam int Z = 6, MB = 4, W = 7, OFF = 3, L = 10;
  localparam int NBW = NPC * MB, S = W + MU, NSTEP = L + S;
  logic clk = 0, rst_n = 0, start = 0, busy, done, in_valid = 0, in_ready;
  llr_t [Z-1:0] in_word;
  logic out_valid, stall;
  logic [Z-1:0] out_bits;
  logic [$clog2(L)-1:0] out_block;
  logic [$clog2(NBW)-1:0] out_word;
  int checks = 0, failures = 0;

  windowed_decoder #(.Z(Z), .MB(MB), .W(W), .L(L), .OFF(OFF)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%t fail: %s", $time, what); end
  endtask

  int chan_err, dec_err, nout, clocks, stalls, exp_blk, exp_wrd, corrected_total = 0;
  bit cw_bit, stall_mode, started;
  int err_permille;

  // input driver: all-zero / all-one code word with rare wrong-signed LLRs
  always @(posedge clk) begin
    if (started && (!stall_mode || $urandom_range(0, 2) != 0)) begin
      in_valid <= 1'b1;
      for (int q = 0; q < Z; q++) begin
        if ($urandom_range(0, 999) < err_permille) in_word[q] <= llr_t'(cw_bit ? 2 : -2);
        else in_word[q] <= llr_t'(cw_bit ? -($urandom_range(2, 6)) : $urandom_range(2, 6));
      end
    end else begin
      in_valid <= 1'b0;
    end
  end

  always @(posedge clk) begin
    if (started) begin
      clocks++;
      if (stall) stalls++;
      if (in_valid && in_ready)
        for (int q = 0; q < Z; q++) chan_err += ((in_word[q] < 0) != cw_bit);
      if (out_valid) begin
        chk(int'(out_block) == exp_blk && int'(out_word) == exp_wrd, "output order");
        for (int q = 0; q < Z; q++) dec_err += (out_bits[q] != cw_bit);
        nout++;
        exp_wrd++;
        if (exp_wrd == NBW) begin exp_wrd = 0; exp_blk++; end
      end
    end
  end

  task automatic run_frame(bit cw, bit stl, int perm);
    cw_bit = cw; stall_mode = stl; err_permille = perm;
    chan_err = 0; dec_err = 0; nout = 0; clocks = 0; stalls = 0; exp_blk = 0; exp_wrd = 0;
    @(posedge clk);
    start <= 1;
    started = 1;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    started = 0;
    $display("frame cw=%0d stalls=%0d: channel errors %0d, decoded errors %0d, clocks %0d",
             cw, stalls, chan_err, dec_err, clocks);
    chk(nout == L * NBW, "word count");
    chk(dec_err == 0, "decoded word");
    chk(chan_err > 0, "channel errors present");
    chk(clocks == NSTEP * NBW + (NSTEP - 1) * W * MB + stalls + 3, "frame length");
    if (stl) chk(stalls > 0, "stalls happened");
    corrected_total += chan_err - dec_err;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    run_frame(0, 0, 15);
    run_frame(1, 0, 15);
    run_frame(0, 1, 15);
    run_frame(1, 1, 15);
    run_frame(0, 0, 10);
    $display("corrected %0d channel errors in total", corrected_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
