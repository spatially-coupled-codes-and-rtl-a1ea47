// tb_llr_scaler - random Gaussian samples, scales and offsets against the
// real-valued LLR round(z*scale + offset) clipped to +-7; values that lie
// within 2^-11 of a rounding boundary are allowed either neighbour.
module tb_llr_scaler;
  import sc_ldpc_pkg::*;
  logic signed [15:0] z, offset;
  logic [15:0] scale;
  llr_t llr;
  int checks = 0, failures = 0;

  llr_scaler dut (.z, .scale, .offset, .llr);

  initial begin
    real x, fx;
    int e;
    for (int i = 0; i < 20000; i++) begin
      z      = 16'($signed($urandom_range(0, 32000)) - 16000);
      scale  = 16'($urandom_range(0, 20000));
      offset = 16'($signed($urandom_range(0, 40000)) - 20000);
      if (i < 50) scale = 0;
      #1;
      x  = real'(z) / 4096.0 * real'(scale) / 4096.0 + real'(offset) / 4096.0;
      fx = $floor(x + 0.5);
      e  = int'(fx);
      if (e > 7) e = 7;
      if (e < -7) e = -7;
      checks++;
      if (int'(llr) != e) begin
        if (!((x + 0.5 - fx < 0.0005) && (int'(llr) == e - 1 || int'(llr) == e)) &&
            !((fx - x - 0.5 > -0.0005) && (fx - x - 0.5 < 0.0005) && int'(llr) == e - 1)) begin
          failures++;
          if (failures < 5) $display("z=%0d s=%0d o=%0d llr=%0d exp=%0d x=%f", z, scale, offset, llr, e, x);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
