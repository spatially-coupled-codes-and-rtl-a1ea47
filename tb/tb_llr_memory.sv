// tb_llr_memory - small multi-port memory (DEPTH 40, 4 ports, Z = 6): random
// writes on distinct addresses through all ports, random reads on all ports
// compared with a shadow array; a write is visible from the next clock.
module tb_llr_memory;
  import sc_ldpc_pkg::*;
  localparam int Z = 6, DEPTH = 40, NP = 4, AW = $clog2(DEPTH);
  logic clk = 0;
  logic [AW-1:0] raddr [NP], waddr [NP];
  app_t [Z-1:0] rdata [NP], wdata [NP];
  logic [NP-1:0] we;
  app_t [Z-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  llr_memory #(.Z(Z), .DEPTH(DEPTH), .NP(NP)) dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base;
    we = '0;
    for (int a = 0; a < DEPTH; a += NP) begin
      for (int p = 0; p < NP; p++) begin
        waddr[p] = AW'(a + p); we[p] = 1;
        for (int q = 0; q < Z; q++) wdata[p][q] = app_t'($urandom);
        shadow[a + p] = wdata[p];
      end
      @(posedge clk); #1;
    end
    for (int it = 0; it < 3000; it++) begin
      base = $urandom_range(0, DEPTH - 1);
      for (int p = 0; p < NP; p++) begin
        raddr[p] = AW'($urandom_range(0, DEPTH - 1));
        waddr[p] = AW'((base + p * 7) % DEPTH);
        we[p] = $urandom_range(0, 1);
        for (int q = 0; q < Z; q++) wdata[p][q] = app_t'($urandom);
      end
      #1;
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (rdata[p] !== shadow[raddr[p]]) failures++;
      end
      @(posedge clk);
      for (int p = 0; p < NP; p++) if (we[p]) shadow[waddr[p]] = wdata[p];
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
