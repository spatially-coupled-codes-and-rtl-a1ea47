// urng_taus - uniform pseudo-random number generator of one noise lane.
//
// A combined three-component Tausworthe generator (L'Ecuyer's taus88): three
// 32-bit shift/xor recurrences whose outputs are xor-ed into one uniformly
// distributed 32-bit word. It has a period of about 2^88, needs no
// multiplier, and produces one word per clock. The platform uses two of
// these per lane to feed the Box-Muller transform; the generator type is
// this design's choice, the publication only says "uniform random number
// generators".
//
// Interface: rnd is the current state's output and is valid from the clock
// after reset. When en is high, the next clock edge advances to the next
// word. Reset (synchronous, active low) loads the three seeds; bits are
// forced so that each component meets taus88's minimum seed (>1, >7, >15).
module urng_taus (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [95:0] seed,
  input  logic        en,
  output logic [31:0] rnd
);

  logic [31:0] s1, s2, s3;
  logic [31:0] n1, n2, n3;

  always_comb begin
    n1 = ((s1 & 32'hFFFF_FFFE) << 12) ^ (((s1 << 13) ^ s1) >> 19);
    n2 = ((s2 & 32'hFFFF_FFF8) << 4)  ^ (((s2 << 2)  ^ s2) >> 25);
    n3 = ((s3 & 32'hFFFF_FFF0) << 17) ^ (((s3 << 3)  ^ s3) >> 11);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1 <= seed[31:0]  | 32'h0000_0010;
      s2 <= seed[63:32] | 32'h0000_0010;
      s3 <= seed[95:64] | 32'h0000_0010;
    end else if (en) begin
      s1 <= n1;
      s2 <= n2;
      s3 <= n3;
    end
  end

  assign rnd = s1 ^ s2 ^ s3;

endmodule
