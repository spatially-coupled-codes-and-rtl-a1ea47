// windowed_decoder - windowed layered min-sum decoder for the terminated,
// time-invariant SC-LDPC code of sc_ldpc_pkg (MU = 2, d_c = 18, rate 4/5).
//
// The code's parity-check matrix is a band of sub-matrices H_0 .. H_MU of
// m x n bits (m = MB*Z, n = 5*MB*Z; 1500 x 7500 by default): check row t
// sees variable sub-blocks t, t-1, .., t-MU. The decoder keeps a window of
// W = 13 check rows and the W+MU sub-blocks they touch. For every new
// sub-block it (1) shifts it in, replacing the oldest sub-block, whose hard
// decisions are shifted out, and (2) runs one layered scaled min-sum pass
// over the W*m window checks with two engines working on non-overlapping
// parts, the second OFF = 6 block rows ahead of the first. Each sub-block
// stays W steps in the window, so it sees 2W check-row iterations. Steps,
// the engine schedule and the termination handling are in window_ctrl.
//
// Memories: llr_memory holds the posterior LLRs (W+MU sub-blocks, Z per
// word), cn_msg_memory the compressed check state (W*MB words of Z checks).
// Circulant positions and shifts of every edge of a block row come from two
// tables filled at elaboration from sc_ldpc_pkg::edge_colblock/edge_shift.
// Variables outside the frame (before sub-block 0 or after L-1) are known
// zeros: their edges are masked in the engines and never written.
//
// Interface: in_word carries Z channel LLRs (sub-block order, word by word)
// with a valid/ready handshake; out_valid/out_bits give Z hard decisions
// (1 = negative LLR) with their sub-block and word index, one clock after
// the word is read. start begins a frame of L sub-blocks; done pulses when
// the last decisions have left. stall is high in clocks where input is
// needed but not valid.
//
// Follows the publication: W = 13, two engines offset by 6m, one pass per
// window position, layered decoding with scaled min-sum and compressed
// check storage, circulants of 30, L = 90 terminated frames. This design's
// own choices: the circulant table, number formats, scaling 0.75, a memory
// of W+MU (not W+MU-1) sub-blocks, sequential shift and sweep phases.
module windowed_decoder import sc_ldpc_pkg::*; #(
  parameter int Z   = 30,
  parameter int MB  = 50,
  parameter int W   = 13,
  parameter int L   = 90,
  parameter int OFF = 6,
  localparam int S      = W + MU,
  localparam int NBW    = NPC * MB,
  localparam int DEPTH  = S * NBW,
  localparam int CDEPTH = W * MB,
  localparam int AW     = $clog2(DEPTH),
  localparam int CAW    = $clog2(CDEPTH),
  localparam int ZW     = $clog2(Z),
  localparam int WRD_W  = $clog2(NBW),
  localparam int BLK_W  = $clog2(L),
  localparam int NP     = 2 * DC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic              in_valid,
  output logic              in_ready,
  input  llr_t [Z-1:0]      in_word,
  output logic              out_valid,
  output logic [Z-1:0]      out_bits,
  output logic [BLK_W-1:0]  out_block,
  output logic [WRD_W-1:0]  out_word,
  output logic              stall
);

  // ---- circulant tables: column block and shift of edge e in block row r
  logic [WRD_W-1:0] colb_rom [DC][MB];
  logic [ZW-1:0]    shf_rom  [DC][MB];
  for (genvar e = 0; e < DC; e++) begin : g_e
    for (genvar r = 0; r < MB; r++) begin : g_r
      localparam int CB = edge_colblock(e, r, MB);
      localparam int SH = edge_shift(e, r, Z);
      assign colb_rom[e][r] = WRD_W'(CB);
      assign shf_rom[e][r]  = ZW'(SH);
    end
  end

  // ---- schedule
  logic                 ld_active, ld_need_in, ld_adv, ld_out_valid;
  logic [$clog2(S)-1:0] ld_slot;
  logic [WRD_W-1:0]     ld_word;
  logic [$clog2(W)-1:0] ld_crow;
  logic [BLK_W-1:0]     ld_out_block;
  logic                 sw_active;
  logic [$clog2(MB)-1:0] sw_r;
  logic [$clog2(W)-1:0] sw_rslot [2];
  logic [$clog2(S)-1:0] sw_vslot [2];
  logic signed [15:0]   sw_t     [2];

  window_ctrl #(.MB(MB), .W(W), .L(L), .OFF(OFF)) u_ctrl (
    .clk, .rst_n, .start, .in_valid, .busy, .done,
    .ld_active, .ld_need_in, .ld_adv, .ld_out_valid, .ld_stall(stall),
    .ld_slot, .ld_word, .ld_crow, .ld_out_block,
    .sw_active, .sw_r, .sw_rslot, .sw_vslot, .sw_t
  );

  assign in_ready = ld_active && ld_need_in;

  // ---- memories
  logic [AW-1:0]  m_raddr [NP];
  app_t [Z-1:0]   m_rdata [NP];
  logic [NP-1:0]  m_we;
  logic [AW-1:0]  m_waddr [NP];
  app_t [Z-1:0]   m_wdata [NP];

  llr_memory #(.Z(Z), .DEPTH(DEPTH), .NP(NP)) u_llr_mem (
    .clk, .raddr(m_raddr), .rdata(m_rdata), .we(m_we), .waddr(m_waddr), .wdata(m_wdata)
  );

  logic [CAW-1:0]        c_raddr [2];
  cn_state_t [Z-1:0]     c_rdata [2];
  logic [1:0]            c_we;
  logic [CAW-1:0]        c_waddr [2];
  cn_state_t [Z-1:0]     c_wdata [2];

  cn_msg_memory #(.Z(Z), .DEPTH(CDEPTH)) u_cn_mem (
    .clk, .raddr(c_raddr), .rdata(c_rdata), .we(c_we), .waddr(c_waddr), .wdata(c_wdata)
  );

  // ---- engines
  app_t [Z-1:0]      e_in    [2][DC];
  app_t [Z-1:0]      e_out   [2][DC];
  logic [ZW-1:0]     e_shift [2][DC];
  logic [DC-1:0]     e_known [2];
  cn_state_t [Z-1:0] e_st    [2];
  logic [AW-1:0]     e_addr  [2][DC];

  for (genvar g = 0; g < 2; g++) begin : g_eng
    int vs, b;
    always_comb begin
      for (int e = 0; e < DC; e++) begin
        vs = int'(sw_vslot[g]) - edge_sub(e);
        if (vs < 0) vs += S;
        b = int'(sw_t[g]) - edge_sub(e);
        e_known[g][e] = (b < 0) || (b >= L);
        e_addr[g][e]  = AW'(vs * NBW + int'(colb_rom[e][sw_r]));
        e_shift[g][e] = shf_rom[e][sw_r];
        e_in[g][e]    = m_rdata[g * DC + e];
      end
    end

    dec_engine #(.Z(Z)) u_eng (
      .word_in  (e_in[g]),
      .shift    (e_shift[g]),
      .known    (e_known[g]),
      .st_in    (c_rdata[g]),
      .word_out (e_out[g]),
      .st_out   (e_st[g])
    );
  end

  // ---- memory port multiplexing: sweep = engines, load = port 0
  app_t [Z-1:0] in_ext;
  always_comb begin
    for (int q = 0; q < Z; q++) in_ext[q] = app_t'(in_word[q]);
  end

  always_comb begin
    for (int g = 0; g < 2; g++)
      for (int e = 0; e < DC; e++) begin
        m_raddr[g * DC + e] = e_addr[g][e];
        m_waddr[g * DC + e] = e_addr[g][e];
        m_wdata[g * DC + e] = e_out[g][e];
        m_we[g * DC + e]    = sw_active && !e_known[g][e];
      end
    for (int g = 0; g < 2; g++) begin
      c_raddr[g] = CAW'(int'(sw_rslot[g]) * MB + int'(sw_r));
      c_waddr[g] = c_raddr[g];
      c_wdata[g] = e_st[g];
      c_we[g]    = sw_active;
    end
    if (ld_active) begin
      m_raddr[0] = AW'(int'(ld_slot) * NBW + int'(ld_word));
      m_waddr[0] = m_raddr[0];
      m_wdata[0] = in_ext;
      m_we[0]    = ld_need_in && in_valid;
      c_waddr[0] = CAW'(int'(ld_crow) * MB + int'(ld_word));
      c_wdata[0] = '0;
      c_we[0]    = (int'(ld_word) < MB);
    end
  end

  // ---- hard decisions of the sub-block leaving the window
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= ld_adv && ld_out_valid;
    end
    for (int q = 0; q < Z; q++) out_bits[q] <= m_rdata[0][q][APP_W-1];
    out_block <= ld_out_block;
    out_word  <= ld_word;
  end

  // no two ports may write the same word in one clock
  always_ff @(posedge clk) begin
    if (rst_n && sw_active)
      for (int p = 0; p < NP; p++)
        for (int p2 = p + 1; p2 < NP; p2++)
          assert (!(m_we[p] && m_we[p2] && m_waddr[p] == m_waddr[p2]))
            else $error("windowed_decoder: write conflict on word %0d", m_waddr[p]);
  end

endmodule
