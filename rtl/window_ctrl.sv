// window_ctrl - schedule of the windowed SC-LDPC decoder.
//
// A frame is L sub-blocks of n code bits, zero-terminated. The decoder's
// window spans W block rows (check rows t0 .. t0+W-1) and the W+MU variable
// sub-blocks they touch. Decoding proceeds in steps s = 0 .. L+W+MU-1:
//
//   LOAD  (n/Z clocks): sub-block s is shifted into ring slot s mod (W+MU),
//         one word of Z LLRs per clock, while the word it replaces (sub-block
//         s-W-MU, now leaving the window) is read out as hard decisions. The
//         check-message slot of the row entering the window (row s) is
//         cleared. Sub-blocks s >= L lie beyond the termination and need no
//         input. While input is needed and not valid the phase stalls.
//   SWEEP (W*m/Z clocks): rows t0 = s-W+1 .. s are updated once by two
//         engines, one circulant block row per clock each. Engine 0 walks
//         the window from its oldest row; engine 1 runs OFF rows (OFF*m
//         checks) ahead, wrapping around, exactly as the publication's
//         schedule "(i + 6m - 1) mod Wm + 1". With OFF >= MU+1 and
//         W-OFF >= MU+1 the two engines never touch the same sub-block.
//
// The last step only loads (its sweep would serve no output), so a frame
// takes (L+W+MU)*n/Z + (L+W+MU-1)*W*m/Z clocks plus input stalls; done
// pulses for one clock at its end. Row indices t are signed: rows and
// sub-blocks outside the frame are reported so that the decoder can treat
// them as known. The split into a load and a sweep phase, not overlapped,
// is this design's choice.
module window_ctrl import sc_ldpc_pkg::*; #(
  parameter int MB  = 50,
  parameter int W   = 13,
  parameter int L   = 90,
  parameter int OFF = 6,
  localparam int S     = W + MU,
  localparam int NBW   = NPC * MB,
  localparam int NSTEP = L + S,
  localparam int SLW   = $clog2(S),
  localparam int RSW   = $clog2(W),
  localparam int RW    = $clog2(MB),
  localparam int WRD_W = $clog2(NBW),
  localparam int BLK_W = $clog2(L)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    in_valid,
  output logic                    busy,
  output logic                    done,
  // shift-in / shift-out phase
  output logic                    ld_active,
  output logic                    ld_need_in,
  output logic                    ld_adv,
  output logic                    ld_out_valid,
  output logic                    ld_stall,
  output logic [SLW-1:0]          ld_slot,
  output logic [WRD_W-1:0]        ld_word,
  output logic [RSW-1:0]          ld_crow,
  output logic [BLK_W-1:0]        ld_out_block,
  // sweep phase, index 0/1 = engine
  output logic                    sw_active,
  output logic [RW-1:0]           sw_r,
  output logic [RSW-1:0]          sw_rslot [2],
  output logic [SLW-1:0]          sw_vslot [2],
  output logic signed [15:0]      sw_t     [2]
);

  if (OFF < MU + 1 || W - OFF < MU + 1) begin : g_bad_off
    $error("window_ctrl: engine offset OFF must keep MU+1 rows to both sides");
  end

  typedef enum logic [1:0] {IDLE, LOAD, SWEEP} state_t;
  state_t state;

  logic [15:0]          s;      // step
  logic [RSW-1:0]       j;      // window row of engine 0
  logic signed [15:0]   t0;     // oldest row of the window
  logic [RSW-1:0]       rs0;    // its check slot
  logic [SLW-1:0]       vs0;    // slot of its sub-block

  assign busy         = (state != IDLE);
  assign ld_active    = (state == LOAD);
  assign sw_active    = (state == SWEEP);
  assign ld_need_in   = (int'(s) < L);
  assign ld_out_valid = (int'(s) >= S);
  assign ld_out_block = BLK_W'(int'(s) - S);
  assign ld_adv       = ld_active && (!ld_need_in || in_valid);
  assign ld_stall     = ld_active && ld_need_in && !in_valid;

  int j1, rsv, vsv;
  always_comb begin
    j1 = int'(j) + OFF;
    if (j1 >= W) j1 -= W;
    sw_t[0] = t0 + 16'(j);
    sw_t[1] = t0 + 16'(j1);
    rsv = int'(rs0) + int'(j);
    sw_rslot[0] = RSW'((rsv >= W) ? rsv - W : rsv);
    rsv = int'(rs0) + j1;
    sw_rslot[1] = RSW'((rsv >= W) ? rsv - W : rsv);
    vsv = int'(vs0) + int'(j);
    sw_vslot[0] = SLW'((vsv >= S) ? vsv - S : vsv);
    vsv = int'(vs0) + j1;
    sw_vslot[1] = SLW'((vsv >= S) ? vsv - S : vsv);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= IDLE;
      done    <= 1'b0;
      s       <= '0;
      ld_word <= '0;
      ld_slot <= '0;
      ld_crow <= '0;
      j       <= '0;
      sw_r    <= '0;
      t0      <= '0;
      rs0     <= '0;
      vs0     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state   <= LOAD;
          s       <= '0;
          ld_word <= '0;
          ld_slot <= '0;
          ld_crow <= '0;
        end
        LOAD: if (ld_adv) begin
          if (int'(ld_word) == NBW - 1) begin
            ld_word <= '0;
            if (int'(s) == NSTEP - 1) begin
              state <= IDLE;
              done  <= 1'b1;
            end else begin
              state <= SWEEP;
              j     <= '0;
              sw_r  <= '0;
              t0    <= 16'(int'(s) - W + 1);
              rs0   <= RSW'((int'(ld_crow) + 1) % W);
              vs0   <= SLW'((int'(ld_slot) + MU + 1) % S);
            end
          end else begin
            ld_word <= ld_word + 1'b1;
          end
        end
        SWEEP: begin
          if (int'(sw_r) == MB - 1) begin
            sw_r <= '0;
            if (int'(j) == W - 1) begin
              state   <= LOAD;
              s       <= s + 1'b1;
              ld_slot <= SLW'((int'(ld_slot) == S - 1) ? 0 : int'(ld_slot) + 1);
              ld_crow <= RSW'((int'(ld_crow) == W - 1) ? 0 : int'(ld_crow) + 1);
            end else begin
              j <= j + 1'b1;
            end
          end else begin
            sw_r <= sw_r + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
