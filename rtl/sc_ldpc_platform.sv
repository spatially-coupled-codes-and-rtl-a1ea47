// sc_ldpc_platform - error-rate evaluation platform for the SC-LDPC windowed
// decoder: D independent lanes, each a complete transmitter-free link.
//
// Lane: gaussian_llr_gen (two uniform generators, Box-Muller transform,
// multiplier and adder, 15-level quantizer) -> windowed_decoder ->
// error_stats. The lane emulates BPSK transmission of the all-zero code word
// over an AWGN channel by generating the channel LLRs directly; the decoder
// decodes frames of L sub-blocks and the statistics unit counts decoded ones
// as bit errors and records where they occurred.
//
// The host interface is not part of this module: its signals are ports.
// cfg_scale (2/(sigma*delta)) is common to all lanes, cfg_offset
// (2/(sigma^2*delta)), the seeds and the lane enable are per lane. start
// runs num_frames frames on every enabled lane; a frame starts on all
// enabled lanes together and the next one starts when all have finished.
// frames_done counts finished frames; stall_count counts clocks in which a
// decoder waited for its noise generator. The sharing of the scale and the
// per-lane offset follow the platform's block diagram; the frame loop, the
// counters and D = 1 as default are this design's choices.
module sc_ldpc_platform import sc_ldpc_pkg::*; #(
  parameter int D          = 1,
  parameter int Z          = 30,
  parameter int MB         = 50,
  parameter int W          = 13,
  parameter int L          = 90,
  parameter int OFF        = 6,
  parameter int FIFO_DEPTH = 16,
  localparam int BLK_W     = $clog2(L),
  localparam int WRD_W     = $clog2(NPC * MB),
  localparam int REC_W     = 16 + BLK_W + WRD_W + Z
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic        [15:0] cfg_scale,
  input  logic signed [15:0] cfg_offset  [D],
  input  logic        [95:0] cfg_seed_a  [D],
  input  logic        [95:0] cfg_seed_b  [D],
  input  logic     [D-1:0]   cfg_lane_en,
  input  logic               start,
  input  logic        [15:0] num_frames,
  input  logic               stats_clear,
  output logic               busy,
  output logic        [15:0] frames_done,
  output logic        [47:0] bit_count   [D],
  output logic        [47:0] err_count   [D],
  output logic        [31:0] ovf_count   [D],
  output logic        [31:0] stall_count [D],
  output logic     [D-1:0]   pos_valid,
  input  logic     [D-1:0]   pos_ready,
  output logic [REC_W-1:0]   pos_record  [D]
);

  // ---- frame loop
  typedef enum logic [1:0] {F_IDLE, F_START, F_RUN} fstate_t;
  fstate_t         fstate;
  logic [15:0]     frame;
  logic [D-1:0]    dec_start, dec_done, lane_done, run_en;

  assign busy = (fstate != F_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fstate      <= F_IDLE;
      frame       <= '0;
      frames_done <= '0;
      lane_done   <= '0;
      run_en      <= '0;
    end else begin
      if (stats_clear) frames_done <= '0;
      unique case (fstate)
        F_IDLE: if (start && num_frames != 0 && cfg_lane_en != '0) begin
          fstate <= F_START;
          frame  <= '0;
          run_en <= cfg_lane_en;
        end
        F_START: begin
          lane_done <= ~run_en;
          fstate    <= F_RUN;
        end
        F_RUN: begin
          if ((lane_done | dec_done) == '1) begin
            frames_done <= frames_done + 1'b1;
            if (frame == num_frames - 1'b1) begin
              fstate <= F_IDLE;
            end else begin
              frame  <= frame + 1'b1;
              fstate <= F_START;
            end
          end else begin
            lane_done <= lane_done | dec_done;
          end
        end
        default: fstate <= F_IDLE;
      endcase
    end
  end

  assign dec_start = (fstate == F_START) ? run_en : '0;

  // ---- lanes
  for (genvar d = 0; d < D; d++) begin : g_lane
    logic              g_valid, g_ready;
    llr_t [Z-1:0]      g_word;
    logic              o_valid, stall;
    logic [Z-1:0]      o_bits;
    logic [BLK_W-1:0]  o_block;
    logic [WRD_W-1:0]  o_word;
    logic              dbusy;

    gaussian_llr_gen #(.Z(Z)) u_gen (
      .clk, .rst_n,
      .seed_a   (cfg_seed_a[d]),
      .seed_b   (cfg_seed_b[d]),
      .scale    (cfg_scale),
      .offset   (cfg_offset[d]),
      .out_valid(g_valid),
      .out_ready(g_ready),
      .out_word (g_word)
    );

    windowed_decoder #(.Z(Z), .MB(MB), .W(W), .L(L), .OFF(OFF)) u_dec (
      .clk, .rst_n,
      .start    (dec_start[d]),
      .busy     (dbusy),
      .done     (dec_done[d]),
      .in_valid (g_valid),
      .in_ready (g_ready),
      .in_word  (g_word),
      .out_valid(o_valid),
      .out_bits (o_bits),
      .out_block(o_block),
      .out_word (o_word),
      .stall    (stall)
    );

    error_stats #(.Z(Z), .BLK_W(BLK_W), .WRD_W(WRD_W), .FRM_W(16),
                  .FIFO_DEPTH(FIFO_DEPTH)) u_stats (
      .clk, .rst_n,
      .clear     (stats_clear),
      .in_valid  (o_valid),
      .in_bits   (o_bits),
      .in_frame  (frame),
      .in_block  (o_block),
      .in_word   (o_word),
      .bit_count (bit_count[d]),
      .err_count (err_count[d]),
      .ovf_count (ovf_count[d]),
      .pos_valid (pos_valid[d]),
      .pos_ready (pos_ready[d]),
      .pos_record(pos_record[d])
    );

    always_ff @(posedge clk) begin
      if (!rst_n || stats_clear) stall_count[d] <= '0;
      else if (stall)            stall_count[d] <= stall_count[d] + 1'b1;
    end

    // a lane is only started once its decoder has finished the previous frame
    a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) dec_start[d] |-> !dbusy)
      else $error("lane %0d started while its decoder is busy", d);
  end

endmodule
