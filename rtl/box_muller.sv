// box_muller - Box-Muller transform: two uniform words in, two independent
// standard Gaussian samples out.
//
//   z0 = sqrt(-2 ln u1) * cos(2 pi u2),   z1 = sqrt(-2 ln u1) * sin(2 pi u2)
//
// The transform itself is the one the platform names; how it is computed is
// this design's choice. The top U_W bits of u1 address a radius table and
// the top A_W bits of u2 a cosine table (sin is read from the same table a
// quarter turn earlier). Both tables are filled at elaboration time from
// the formulas above, sampled at the bin centres (k + 0.5) / 2^U_W and
// (k + 0.5) / 2^A_W. With U_W = 10 the largest radius is about 3.9, so the
// tails beyond that are cut off; a generator meant for very low error rates
// would need a finer radius table. The low 32-U_W bits of u1 and 32-A_W bits
// of u2 are therefore unused; the ports stay 32 bits wide so that a finer
// table only needs a larger parameter.
//
// Formats: radius unsigned Q3.12, cosine signed Q1.14, outputs signed Q3.12
// in 16 bits. Timing: two pipeline stages (table look-up, multiply), both
// advancing only while en is high, so z0/z1 belong to the u1/u2 presented
// two enabled clocks earlier.
module box_muller #(
  parameter int U_W = 10,
  parameter int A_W = 10
) (
  input  logic               clk,
  input  logic               en,
  input  logic        [31:0] u1,
  input  logic        [31:0] u2,
  output logic signed [15:0] z0,
  output logic signed [15:0] z1
);

  localparam int NR = 1 << U_W;
  localparam int NA = 1 << A_W;
  localparam real PI = 3.14159265358979323846;

  function automatic int radius_val(int k);
    real u;
    u = (real'(k) + 0.5) / real'(NR);
    return int'($sqrt(-2.0 * $ln(u)) * 4096.0);
  endfunction

  function automatic int cos_val(int k);
    real a;
    a = 2.0 * PI * (real'(k) + 0.5) / real'(NA);
    return int'($cos(a) * 16384.0);
  endfunction

  logic        [15:0] rad_rom [NR];
  logic signed [15:0] cos_rom [NA];

  for (genvar g = 0; g < NR; g++) begin : g_rad
    localparam int RV = radius_val(g);
    assign rad_rom[g] = 16'(RV);
  end
  for (genvar g = 0; g < NA; g++) begin : g_cos
    localparam int CV = cos_val(g);
    assign cos_rom[g] = 16'(CV);
  end

  logic [U_W-1:0] ridx;
  logic [A_W-1:0] cidx, sidx;
  assign ridx = u1[31 -: U_W];
  assign cidx = u2[31 -: A_W];
  assign sidx = cidx - A_W'(NA / 4);   // sin(x) = cos(x - pi/2)

  logic        [15:0] rad_q;
  logic signed [15:0] cos_q, sin_q;

  always_ff @(posedge clk) begin
    if (en) begin
      rad_q <= rad_rom[ridx];
      cos_q <= cos_rom[cidx];
      sin_q <= cos_rom[sidx];
    end
  end

  logic signed [32:0] p0, p1;
  assign p0 = $signed({1'b0, rad_q}) * cos_q;
  assign p1 = $signed({1'b0, rad_q}) * sin_q;

  always_ff @(posedge clk) begin
    if (en) begin
      z0 <= 16'(p0 >>> 14);
      z1 <= 16'(p1 >>> 14);
    end
  end

endmodule
