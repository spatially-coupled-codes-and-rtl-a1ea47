// tb_box_muller - drives the Box-Muller transform with random uniforms and
// compares each output with sqrt(-2 ln u1) cos/sin(2 pi u2) evaluated in
// floating point at the table's bin centres (tolerance 2 LSB of Q3.12),
// checks the two-clock latency and the hold on en, and checks mean and
// variance of 20000 samples.
module tb_box_muller;
  logic clk = 0, en = 0;
  logic [31:0] u1 = 0, u2 = 0;
  logic signed [15:0] z0, z1;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979323846;

  box_muller dut (.clk, .en, .u1, .u2, .z0, .z1);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void expect_z(logic [31:0] a, logic [31:0] b, output real e0, output real e1);
    real r, t;
    r = $sqrt(-2.0 * $ln((real'(a[31:22]) + 0.5) / 1024.0));
    t = 2.0 * PI * (real'(b[31:22]) + 0.5) / 1024.0;
    e0 = r * $cos(t) * 4096.0;
    e1 = r * $sin(t) * 4096.0;
  endfunction

  initial begin
    logic [31:0] qa[$], qb[$];
    real e0, e1, sum, sq, x;
    int n;
    sum = 0; sq = 0; n = 0;
    @(posedge clk);
    for (int i = 0; i < 20000 + 1; i++) begin
      u1 <= $urandom; u2 <= $urandom; en <= 1;
      @(posedge clk);
      qa.push_back(u1); qb.push_back(u2);
      #1;
      if (qa.size() > 1) begin
        expect_z(qa.pop_front(), qb.pop_front(), e0, e1);
        checks++;
        if ((real'(z0) - e0 > 2.0) || (e0 - real'(z0) > 2.0) ||
            (real'(z1) - e1 > 2.0) || (e1 - real'(z1) > 2.0)) begin
          failures++;
          if (failures < 5) $display("mismatch: %0d %0d vs %f %f", z0, z1, e0, e1);
        end
        x = real'(z0) / 4096.0; sum += x; sq += x * x; n++;
      end
    end
    // hold: outputs must not change while en is low
    begin
      logic signed [15:0] h0, h1;
      h0 = z0; h1 = z1;
      en <= 0; u1 <= $urandom; u2 <= $urandom;
      repeat (3) @(posedge clk);
      #1 checks++;
      if (z0 !== h0 || z1 !== h1) failures++;
    end
    checks++;
    if (sum / n > 0.03 || sum / n < -0.03) failures++;
    checks++;
    if (sq / n > 1.05 || sq / n < 0.95) failures++;
    $display("mean %f var %f", sum / n, sq / n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
