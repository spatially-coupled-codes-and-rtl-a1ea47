// tb_sc_ldpc_platform - end-to-end run of the platform at a reduced size
// (D = 2 lanes, Z = 6, MB = 4, W = 7, OFF = 3, L = 10, error FIFO depth 4).
// Both lanes share the multiplier (noise scale); lane 0 gets the LLR mean of
// sigma = 0.43 (about 1 % wrong-signed channel LLRs), lane 1 a much smaller
// mean and thus a much noisier channel. Two frames, then a third run with
// lane 1 disabled. Checks the bit counters, that lane 0's decoder corrected
// its channel errors, that the error counters match an independent count of
// the decoded words, the error records read from the FIFO, and counts how
// often each mechanism happened: decoder input stalls, generator
// back-pressure, corrected channel errors, error records, FIFO overflow,
// back-to-back frames and a disabled lane. A mechanism that never happened
// is a failure.
module tb_sc_ldpc_platform;
  import sc_ldpc_pkg::*;
  localparam int D = 2, Z = 6, MB = 4, W = 7, OFF = 3, L = 10, FD = 4;
  localparam int NBW = NPC * MB, BLK_W = $clog2(L), WRD_W = $clog2(NBW);
  localparam int REC_W = 16 + BLK_W + WRD_W + Z;
  localparam int FRAME_BITS = L * NBW * Z;

  logic clk = 0, rst_n = 0, start = 0, stats_clear = 0, busy;
  logic [15:0] cfg_scale, num_frames, frames_done;
  logic signed [15:0] cfg_offset [D];
  logic [95:0] cfg_seed_a [D], cfg_seed_b [D];
  logic [D-1:0] cfg_lane_en, pos_valid, pos_ready;
  logic [47:0] bit_count [D], err_count [D];
  logic [31:0] ovf_count [D], stall_count [D];
  logic [REC_W-1:0] pos_record [D];
  int checks = 0, failures = 0;

  sc_ldpc_platform #(.D(D), .Z(Z), .MB(MB), .W(W), .L(L), .OFF(OFF), .FIFO_DEPTH(FD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("%t fail: %s", $time, what); end
  endtask

  // independent monitors
  int chan_err [D], dec_err [D], backpressure [D], records [D], rec_bits [D];
  logic [REC_W-1:0] rec;
  // sampled on the falling edge, when all design signals are settled
  always @(negedge clk) begin
    if (dut.g_lane[0].g_valid && dut.g_lane[0].g_ready)
      for (int q = 0; q < Z; q++) chan_err[0] += int'(dut.g_lane[0].g_word[q][LLR_W-1]);
    if (dut.g_lane[1].g_valid && dut.g_lane[1].g_ready)
      for (int q = 0; q < Z; q++) chan_err[1] += int'(dut.g_lane[1].g_word[q][LLR_W-1]);
    if (dut.g_lane[0].o_valid) dec_err[0] += $countones(dut.g_lane[0].o_bits);
    if (dut.g_lane[1].o_valid) dec_err[1] += $countones(dut.g_lane[1].o_bits);
    if (dut.g_lane[0].g_valid && !dut.g_lane[0].g_ready) backpressure[0]++;
    if (dut.g_lane[1].g_valid && !dut.g_lane[1].g_ready) backpressure[1]++;
    for (int d = 0; d < D; d++)
      if (pos_valid[d] && pos_ready[d]) begin
        rec = pos_record[d];
        records[d]++;
        rec_bits[d] += $countones(rec[Z-1:0]);
        if (rec[Z-1:0] == 0 || int'(rec[Z +: WRD_W]) >= NBW || int'(rec[Z + WRD_W +: BLK_W]) >= L ||
            int'(rec[REC_W-1 -: 16]) >= 2) begin
          failures++;
          $display("bad record %h", rec);
        end
      end
  end

  function automatic logic [15:0] q412(real x);
    return 16'($rtoi(x * 4096.0 + 0.5));
  endfunction

  initial begin
    real sig0, delta;
    delta = 1.5;
    sig0 = 0.43;
    cfg_scale     = q412(2.0 / (sig0 * delta));
    cfg_offset[0] = q412(2.0 / (sig0 * sig0 * delta));
    cfg_offset[1] = q412(2.0 / (sig0 * delta) * 0.45);
    cfg_seed_a[0] = 96'h0123_4567_89ab_cdef_0f1e_2d3c; cfg_seed_b[0] = 96'h1357_9bdf_2468_ace0_7777_5555;
    cfg_seed_a[1] = 96'hdead_beef_0bad_f00d_1234_4321; cfg_seed_b[1] = 96'hcafe_babe_5a5a_a5a5_9999_3333;
    cfg_lane_en = 2'b11;
    num_frames = 2;
    pos_ready = 2'b01;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (10) @(posedge clk);
    $display("lane0: chan %0d dec %0d err %0d bits %0d stalls %0d", chan_err[0], dec_err[0],
             err_count[0], bit_count[0], stall_count[0]);
    $display("lane1: chan %0d dec %0d err %0d ovf %0d", chan_err[1], dec_err[1], err_count[1], ovf_count[1]);
    chk(frames_done == 2, "frames done");
    chk(bit_count[0] == 48'(2 * FRAME_BITS) && bit_count[1] == 48'(2 * FRAME_BITS), "bit counts");
    chk(err_count[0] == 48'(dec_err[0]) && err_count[1] == 48'(dec_err[1]), "error counts");
    chk(chan_err[0] > 0 && dec_err[0] * 4 < chan_err[0], "lane 0 corrects most channel errors");
    chk(dec_err[1] > 0, "lane 1 leaves errors");
    chk(rec_bits[0] == dec_err[0], "lane 0 records cover all errors");
    // drain lane 1's FIFO
    pos_ready = 2'b11;
    repeat (FD + 2) @(posedge clk);
    chk(!pos_valid[1], "lane 1 fifo drained");
    // third run: lane 1 disabled
    cfg_lane_en = 2'b01;
    num_frames = 1;
    start <= 1; @(posedge clk); start <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (10) @(posedge clk);
    chk(bit_count[0] == 48'(3 * FRAME_BITS) && bit_count[1] == 48'(2 * FRAME_BITS), "disabled lane idle");
    chk(frames_done == 3, "frames done after third run");
    $display("mechanisms: stalls %0d backpressure %0d corrected %0d records %0d overflow %0d frames %0d",
             stall_count[0], backpressure[0], chan_err[0] - dec_err[0], records[0] + records[1],
             ovf_count[1], frames_done);
    chk(stall_count[0] > 0, "decoder input stall happened");
    chk(backpressure[0] > 0, "generator back-pressure happened");
    chk(chan_err[0] > dec_err[0], "errors corrected");
    chk(records[0] + records[1] > 0, "error record happened");
    chk(ovf_count[1] > 0, "fifo overflow happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
