// gaussian_llr_gen - noise lane front end: produces quantized channel LLRs of
// the all-zero code word sent with BPSK over an AWGN channel.
//
// Two uniform generators (urng_taus) feed one Box-Muller transform, whose two
// Gaussian outputs per clock go through the multiplier/adder/quantizer
// (llr_scaler, scale shared by all lanes, offset per lane). The LLRs are
// packed two per clock into words of Z LLRs, the decoder's input width, and
// offered with a valid/ready handshake: out_word holds sample 0 in element 0.
// While a full word waits for out_ready, the whole lane (generators and
// pipeline) holds, so the LLR sequence does not depend on back-pressure.
//
// Timing: after reset the first word is ready after Z/2 + 2 clocks, then one
// word every Z/2 clocks while out_ready is high. Packing, back-pressure and
// the seeds' format are this design's choices; the chain URNG x 2 ->
// Box-Muller -> multiply -> add follows the platform's lane.
module gaussian_llr_gen import sc_ldpc_pkg::*; #(
  parameter int Z = 30
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic        [95:0] seed_a,
  input  logic        [95:0] seed_b,
  input  logic        [15:0] scale,
  input  logic signed [15:0] offset,
  output logic               out_valid,
  input  logic               out_ready,
  output llr_t [Z-1:0]       out_word
);

  if (Z % 2 != 0) begin : g_bad_z
    $error("gaussian_llr_gen: Z must be even");
  end

  logic full, adv;
  logic [$clog2(Z/2)-1:0] cnt;
  logic v1, v2;                      // pipeline valid (stage 1, stage 2)
  logic [31:0] u1, u2;
  logic signed [15:0] z0, z1;
  llr_t llr0, llr1;

  assign adv       = !full || out_ready;
  assign out_valid = full;

  urng_taus u_urng_a (.clk, .rst_n, .seed(seed_a), .en(adv), .rnd(u1));
  urng_taus u_urng_b (.clk, .rst_n, .seed(seed_b), .en(adv), .rnd(u2));

  box_muller u_bm (.clk, .en(adv), .u1, .u2, .z0, .z1);

  llr_scaler u_sc0 (.z(z0), .scale, .offset, .llr(llr0));
  llr_scaler u_sc1 (.z(z1), .scale, .offset, .llr(llr1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full <= 1'b0;
      cnt  <= '0;
      v1   <= 1'b0;
      v2   <= 1'b0;
    end else if (adv) begin
      v1 <= 1'b1;
      v2 <= v1;
      if (full) full <= 1'b0;       // adv with full means the word was taken
      if (v2) begin
        out_word[2 * cnt]     <= llr0;
        out_word[2 * cnt + 1] <= llr1;
        if (int'(cnt) == Z / 2 - 1) begin
          cnt  <= '0;
          full <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
