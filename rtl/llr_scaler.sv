// llr_scaler - turns a standard Gaussian sample into a quantized channel LLR.
//
// For BPSK over an AWGN channel with noise variance sigma^2 and the all-zero
// code word (every symbol +1), the channel LLR is 2/sigma^2 + (2/sigma) z with
// z ~ N(0,1). The block is the multiplier and the adder of the noise lane
// followed by the 15-level quantizer: llr = sat7(round(z * scale + offset)).
// The quantizer step is folded into the two operands, so the host programs
//   scale  = 2 / (sigma * delta)    unsigned Q4.12 (shared by all lanes)
//   offset = 2 / (sigma^2 * delta)  signed   Q4.12 (one per lane)
// where delta is the LLR value of one quantizer step. The result is rounded
// to the nearest integer (halves away from minus infinity) and saturated to
// -7..+7. Purely combinational.
module llr_scaler import sc_ldpc_pkg::*; (
  input  logic signed [15:0] z,        // Q3.12
  input  logic        [15:0] scale,    // Q4.12
  input  logic signed [15:0] offset,   // Q4.12
  output llr_t               llr
);

  logic signed [32:0] prod;     // Q.24
  logic signed [33:0] acc;      // Q.12
  logic signed [21:0] rnd;      // integer

  always_comb begin
    prod = z * $signed({1'b0, scale});
    acc  = 34'(prod >>> 12) + 34'(offset);
    rnd  = 22'((acc + 34'sd2048) >>> 12);
    if (rnd > 22'sd7)       llr = llr_t'(LLR_MAX);
    else if (rnd < -22'sd7) llr = llr_t'(-LLR_MAX);
    else                    llr = llr_t'(rnd);
  end

endmodule
