// tb_gaussian_llr_gen - two generators with the same seeds, one always ready,
// one under random back-pressure: their word sequences must be identical.
// Also checks the word rate (one word per Z/2 clocks when ready) and the
// mean and variance of the LLRs for sigma = 1 (mean 2, variance about 4
// before quantization).
module tb_gaussian_llr_gen;
  import sc_ldpc_pkg::*;
  localparam int Z = 30;
  logic clk = 0, rst_n = 0;
  logic [95:0] seed_a = 96'h1111_2222_3333_4444_5555_6666, seed_b = 96'hAAAA_BBBB_CCCC_DDDD_EEEE_FFFF;
  logic [15:0] scale = 16'd8192;
  logic signed [15:0] offset = 16'sd8192;
  logic va, vb, rb = 0;
  llr_t [Z-1:0] wa, wb;
  int checks = 0, failures = 0;

  gaussian_llr_gen #(.Z(Z)) dut_a (.clk, .rst_n, .seed_a, .seed_b, .scale, .offset,
                                   .out_valid(va), .out_ready(1'b1), .out_word(wa));
  gaussian_llr_gen #(.Z(Z)) dut_b (.clk, .rst_n, .seed_a, .seed_b, .scale, .offset,
                                   .out_valid(vb), .out_ready(rb), .out_word(wb));

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  llr_t [Z-1:0] qa[$];
  real sum = 0, sq = 0;
  int n = 0, nb = 0, last = -1, cyc = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    while (nb < 400) begin
      rb <= ($urandom_range(0, 2) == 0);
      #1;
      cyc++;
      if (va) begin
        qa.push_back(wa);
        if (last >= 0) begin
          checks++;
          if (cyc - last != Z / 2) failures++;
        end
        last = cyc;
        for (int q = 0; q < Z; q++) begin
          sum += real'(wa[q]); sq += real'(wa[q]) * real'(wa[q]); n++;
        end
      end
      if (vb && rb) begin
        checks++;
        if (qa.size() == 0 || wb !== qa[0]) failures++;
        if (qa.size() > 0) void'(qa.pop_front());
        nb++;
      end
      @(posedge clk);
    end
    sum = sum / n;
    sq = sq / n - sum * sum;
    $display("LLR mean %f variance %f over %0d", sum, sq, n);
    checks++;
    if (sum < 1.8 || sum > 2.2) failures++;
    checks++;
    if (sq < 3.3 || sq > 4.5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
