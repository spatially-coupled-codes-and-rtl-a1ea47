// tb_sc_ldpc_platform_full - the platform at its default size (one lane,
// n = 7500, m = 1500, Z = 30, W = 13, L = 90): one complete frame of 675,000
// code bits at Eb/N0 = 4 dB for the rate-0.8 code (sigma = 0.499, about
// 2.3 % wrong-signed channel LLRs), quantizer step 1.5. Checks the number of
// decoded bits, that the decoder removed nearly all channel errors, that the
// error counter matches an independent count and the frame length in clocks
// against the schedule: L input sub-blocks at the noise generator's rate of
// one word per 15 clocks, W+MU flush sub-blocks at one word per clock, and
// L+W+MU-1 sweeps of W*m/Z clocks.
module tb_sc_ldpc_platform_full;
  import sc_ldpc_pkg::*;
  localparam int L = 90, NBW = 250, W = 13, MB = 50, Z = 30, S = W + MU, NSTEP = L + S;

  logic clk = 0, rst_n = 0, start = 0, stats_clear = 0, busy;
  logic [15:0] cfg_scale, num_frames, frames_done;
  logic signed [15:0] cfg_offset [1];
  logic [95:0] cfg_seed_a [1], cfg_seed_b [1];
  logic [0:0] cfg_lane_en, pos_valid, pos_ready;
  logic [47:0] bit_count [1], err_count [1];
  logic [31:0] ovf_count [1], stall_count [1];
  logic [16+7+8+30-1:0] pos_record [1];
  int checks = 0, failures = 0;

  sc_ldpc_platform dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("%t fail: %s", $time, what); end
  endtask

  int chan_err, dec_err, cycles;
  always @(negedge clk) begin
    if (busy) cycles++;
    if (dut.g_lane[0].g_valid && dut.g_lane[0].g_ready)
      for (int q = 0; q < Z; q++) chan_err += int'(dut.g_lane[0].g_word[q][LLR_W-1]);
    if (dut.g_lane[0].o_valid) dec_err += $countones(dut.g_lane[0].o_bits);
  end

  function automatic logic [15:0] q412(real x);
    return 16'($rtoi(x * 4096.0 + 0.5));
  endfunction

  initial begin
    real sig, delta;
    int expect_cycles;
    delta = 1.5;
    sig = $sqrt(1.0 / (2.0 * 0.8 * $pow(10.0, 0.4)));
    cfg_scale     = q412(2.0 / (sig * delta));
    cfg_offset[0] = q412(2.0 / (sig * sig * delta));
    cfg_seed_a[0] = 96'h0123_4567_89ab_cdef_0f1e_2d3c;
    cfg_seed_b[0] = 96'h1357_9bdf_2468_ace0_7777_5555;
    cfg_lane_en = 1'b1;
    num_frames = 1;
    pos_ready = 1'b1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (5) @(posedge clk);
    // the generator fills one word ahead during each sweep
    expect_cycles = L * ((NBW - 1) * (Z / 2) + 1) + S * NBW + (NSTEP - 1) * W * MB;
    $display("sigma %f: channel errors %0d, decoded errors %0d (counter %0d), bits %0d, clocks %0d (schedule %0d), stalls %0d",
             sig, chan_err, dec_err, err_count[0], bit_count[0], cycles, expect_cycles, stall_count[0]);
    chk(frames_done == 1, "frame done");
    chk(bit_count[0] == 48'(L * NBW * Z), "decoded bits");
    chk(err_count[0] == 48'(dec_err), "error counter");
    chk(chan_err > 1000, "channel errors present");
    chk(dec_err * 100 < chan_err, "errors corrected");
    chk(cycles >= expect_cycles && cycles <= expect_cycles + 40, "frame length");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
