// tb_error_stats - random decoded words with few errors, FIFO read with
// random back-pressure. Checks the bit and error counters, every error
// record read from the FIFO against a scoreboard, the overflow counter when
// the FIFO is left full, and clear.
module tb_error_stats;
  localparam int Z = 30, BLK_W = 7, WRD_W = 8, FRM_W = 16, DEPTH = 16;
  localparam int REC_W = FRM_W + BLK_W + WRD_W + Z;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, pos_ready = 0, pos_valid;
  logic [Z-1:0] in_bits;
  logic [FRM_W-1:0] in_frame;
  logic [BLK_W-1:0] in_block;
  logic [WRD_W-1:0] in_word;
  logic [47:0] bit_count, err_count;
  logic [31:0] ovf_count;
  logic [REC_W-1:0] pos_record;
  int checks = 0, failures = 0;

  error_stats #(.Z(Z), .BLK_W(BLK_W), .WRD_W(WRD_W), .FRM_W(FRM_W), .FIFO_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%t fail: %s", $time, what); end
  endtask

  logic [REC_W-1:0] sb[$];
  longint nbits, nerr;
  int occ, drops;
  bit was_full;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    nbits = 0; nerr = 0; occ = 0; drops = 0;
    for (int it = 0; it < 3000; it++) begin
      in_valid <= ($urandom_range(0, 1) == 1);
      in_bits  <= ($urandom_range(0, 4) == 0) ? Z'($urandom) & Z'($urandom) & Z'($urandom) : '0;
      in_frame <= FRM_W'($urandom);
      in_block <= BLK_W'($urandom);
      in_word  <= WRD_W'($urandom);
      pos_ready <= (it < 800) ? 1'b0 : (it > 2000) ? 1'b1 : ($urandom_range(0, 2) == 0);
      #1;
      was_full = (occ >= DEPTH);
      if (pos_valid && pos_ready) begin
        chk(sb.size() > 0 && pos_record == sb[0], "record");
        if (sb.size() > 0) void'(sb.pop_front());
        occ--;
      end
      if (in_valid) begin
        nbits += Z;
        nerr += $countones(in_bits);
        if (in_bits != 0) begin
          if (was_full) drops++;
          else begin sb.push_back({in_frame, in_block, in_word, in_bits}); occ++; end
        end
      end
      @(posedge clk);
    end
    in_valid <= 0;
    pos_ready <= 1;
    repeat (DEPTH + 2) begin
      #1;
      if (pos_valid) begin
        chk(sb.size() > 0 && pos_record == sb[0], "record");
        if (sb.size() > 0) void'(sb.pop_front());
      end
      @(posedge clk);
    end
    #1;
    chk(bit_count == 48'(nbits), "bit count");
    chk(err_count == 48'(nerr), "error count");
    chk(int'(ovf_count) == drops, "overflow count");
    chk(drops > 0, "overflow happened");
    chk(!pos_valid && sb.size() == 0, "fifo drained");
    $display("bits %0d errors %0d drops %0d", nbits, nerr, drops);
    clear <= 1; @(posedge clk); clear <= 0; #1;
    chk(bit_count == 0 && err_count == 0 && ovf_count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
