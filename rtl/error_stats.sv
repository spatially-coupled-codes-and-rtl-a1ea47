// error_stats - bit error counter of one lane.
//
// The lane transmits the all-zero code word, so every decoded 1 is a bit
// error. For every valid word of Z hard decisions the unit adds Z to the bit
// counter and the number of ones to the error counter, and pushes a record
// {frame, sub-block, word, error mask} of each word that holds an error into
// a FIFO, from which the host reads the error positions (pos_valid /
// pos_ready handshake, first-word-fall-through). When the FIFO is full the
// record is dropped and ovf_count counts it. clear (synchronous) zeroes the
// counters and empties the FIFO. Counter widths, the record format, the
// FIFO depth and the overflow policy are this design's choices.
module error_stats #(
  parameter int Z          = 30,
  parameter int BLK_W      = 7,
  parameter int WRD_W      = 8,
  parameter int FRM_W      = 16,
  parameter int FIFO_DEPTH = 16,
  localparam int REC_W     = FRM_W + BLK_W + WRD_W + Z
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  logic [Z-1:0]      in_bits,
  input  logic [FRM_W-1:0]  in_frame,
  input  logic [BLK_W-1:0]  in_block,
  input  logic [WRD_W-1:0]  in_word,
  output logic [47:0]       bit_count,
  output logic [47:0]       err_count,
  output logic [31:0]       ovf_count,
  output logic              pos_valid,
  input  logic              pos_ready,
  output logic [REC_W-1:0]  pos_record
);

  localparam int PW = $clog2(FIFO_DEPTH);

  logic [REC_W-1:0] fifo [FIFO_DEPTH];
  logic [PW:0]      wp, rp;
  logic             empty, ffull, push, pop;
  int               ones;

  always_comb begin
    ones = 0;
    for (int q = 0; q < Z; q++) ones += int'(in_bits[q]);
  end

  assign empty      = (wp == rp);
  assign ffull      = (wp[PW] != rp[PW]) && (wp[PW-1:0] == rp[PW-1:0]);
  assign push       = in_valid && (ones != 0) && !ffull;
  assign pop        = pos_ready && !empty;
  assign pos_valid  = !empty;
  assign pos_record = fifo[rp[PW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      bit_count <= '0;
      err_count <= '0;
      ovf_count <= '0;
      wp        <= '0;
      rp        <= '0;
    end else begin
      if (in_valid) begin
        bit_count <= bit_count + 48'(Z);
        err_count <= err_count + 48'(ones);
        if (ones != 0 && ffull) ovf_count <= ovf_count + 1'b1;
      end
      if (push) begin
        fifo[wp[PW-1:0]] <= {in_frame, in_block, in_word, in_bits};
        wp <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
    end
  end

endmodule
