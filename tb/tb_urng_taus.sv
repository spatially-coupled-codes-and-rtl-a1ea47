// tb_urng_taus - checks the uniform generator word by word against the
// taus88 recurrence, including holding while en is low, and checks that the
// top bits are roughly uniform.
module tb_urng_taus;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [95:0] seed = {32'h1234_5678, 32'h9abc_def0, 32'h0fed_cba9};
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  int hist[4];

  urng_taus dut (.clk, .rst_n, .seed, .en, .rnd);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] a, b, c;
    logic en_n;
    a = seed[31:0] | 32'h10; b = seed[63:32] | 32'h10; c = seed[95:64] | 32'h10;
    @(posedge clk); @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 4000; i++) begin
      #1;
      checks++;
      if (rnd !== taus_out(a, b, c)) begin
        failures++;
        if (failures < 5) $display("mismatch %0d: %h vs %h", i, rnd, taus_out(a, b, c));
      end
      en_n = ($urandom_range(0, 3) != 0);
      en <= en_n;
      if (en_n) begin
        taus_step(a, b, c);
        hist[rnd[31:30]]++;
      end
      @(posedge clk);
    end
    for (int h = 0; h < 4; h++) begin
      checks++;
      if (hist[h] < 600 || hist[h] > 900) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
