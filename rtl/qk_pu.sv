// qk_pu: Query-Key processing unit.
//
// Computes the sparse scores Q_i K^T for one query at a time, without a
// separate prediction pass: Keys are read one bit plane at a time, sign
// plane first, and a token stops being read as soon as its best possible
// score can no longer reach the adaptive threshold.
// Contents: the Q buffer, the K buffer (one bank per lane), NL bit-level PE
// lanes, the bit margin generator and the LATS module.
//   1. bmg_start (one cycle after the Q buffer read) makes the bit margin
//      generator build the margin LUT for Q_i; bmg_done follows two cycles on.
//   2. Returned Key planes enter the lanes' K-buffer banks; each lane takes one
//      plane per cycle, updates the token's partial score and reports it to
//      the LATS module.
//   3. LATS keeps the largest lower bound and produces eta.
//   4. eta goes back to all lanes, which request the next plane of kept tokens
//      and drop the others; final scores leave through fin_*.
// The block structure and numbered steps follow the paper's architecture
// figure; interfaces and timing are this design's choices.
// Lint note: rst_n is reported as used both asynchronously and synchronously
// (SYNCASYNCNET). The synchronous use is only the 'disable iff (!rst_n)' of the
// handshake assertions; every flip-flop uses rst_n as an asynchronous reset.
module qk_pu
  import bs_pkg::*;
#(
  parameter int NL     = LANES,
  parameter int DIM_P  = DIM,
  parameter int QW_P   = QW,
  parameter int NP     = NPLANES,
  parameter int TOKW   = $clog2(MAX_SEQ),
  parameter int SBD    = SB_DEPTH,
  parameter int QDEPTH = (QBUF_BYTES * 8) / (DIM * QW),
  parameter int KDEPTH = (KBUF_BYTES * 8) / (LANES * DIM)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  // Q buffer host port and read control
  input  logic                        q_wr_en,
  input  logic [$clog2(QDEPTH)-1:0]   q_wr_addr,
  input  logic [DIM_P-1:0][QW_P-1:0]  q_wr_data,
  input  logic                        q_rd_en,
  input  logic [$clog2(QDEPTH)-1:0]   q_rd_addr,
  input  logic                        bmg_start,
  output logic                        bmg_done,
  // LATS configuration
  input  logic [ALPHA_W-1:0]          alpha,
  input  logic [RAD_W-1:0]            radius,
  // returned Key planes
  input  logic [NL-1:0]               kbuf_wr,
  input  logic [DIM_P-1:0]            kbuf_plane [NL],
  input  logic [TOKW-1:0]             kbuf_tok   [NL],
  input  logic [RW-1:0]               kbuf_r     [NL],
  // next-plane requests
  output logic [NL-1:0]               req_valid,
  input  logic [NL-1:0]               req_ready,
  output logic [TOKW-1:0]             req_tok [NL],
  output logic [RW-1:0]               req_r   [NL],
  // final scores
  output logic [NL-1:0]               fin_valid,
  input  logic [NL-1:0]               fin_ready,
  output logic [TOKW-1:0]             fin_tok   [NL],
  output logic signed [SCORE_W-1:0]   fin_score [NL],
  output logic [NL-1:0]               retire,
  output logic [NL-1:0]               pruned,
  output logic [NL-1:0]               lane_busy,   // lane took a plane
  output logic signed [THR_W-1:0]     max_lb,
  output logic signed [THR_W-1:0]     eta
);
  logic [DIM_P-1:0][QW_P-1:0] q_vec;
  logic signed [SCORE_W-1:0]  m_min [NP];
  logic signed [SCORE_W-1:0]  m_max [NP];
  logic                       have_max;

  q_buffer #(.DIM_P(DIM_P), .QW_P(QW_P), .DEPTH(QDEPTH)) u_qbuf (
    .clk, .wr_en(q_wr_en), .wr_addr(q_wr_addr), .wr_data(q_wr_data),
    .rd_en(q_rd_en), .rd_addr(q_rd_addr), .rd_data(q_vec));

  bit_margin_gen #(.DIM_P(DIM_P), .QW_P(QW_P), .NP(NP), .SW(SCORE_W)) u_bmg (
    .clk, .rst_n, .start(bmg_start), .q(q_vec), .m_min, .m_max, .done(bmg_done));

  logic [NL-1:0]         kb_valid, kb_ready, kb_full;
  logic [DIM_P-1:0]      kb_plane [NL];
  logic [TOKW-1:0]       kb_tok   [NL];
  logic [RW-1:0]         kb_r     [NL];

  k_buffer #(.NL(NL), .DIM_P(DIM_P), .TOKW(TOKW), .DEPTH(KDEPTH)) u_kbuf (
    .clk, .rst_n, .clear,
    .wr_valid(kbuf_wr), .wr_plane(kbuf_plane), .wr_tok(kbuf_tok), .wr_r(kbuf_r),
    .rd_valid(kb_valid), .rd_ready(kb_ready), .rd_plane(kb_plane), .rd_tok(kb_tok),
    .rd_r(kb_r), .bank_full(kb_full));

  logic [NL-1:0]              sc_valid, sb_full;
  logic signed [SCORE_W-1:0]  sc_score [NL];
  logic [RW-1:0]              sc_r [NL];

  for (genvar l = 0; l < NL; l++) begin : g_lane
    pe_lane #(.DIM_P(DIM_P), .QW_P(QW_P), .NP(NP), .NL(NL), .TOKW(TOKW), .SBD(SBD),
              .SW(SCORE_W), .TW(THR_W)) u_lane (
      .clk, .rst_n, .clear, .q(q_vec), .margin_max(m_max), .eta,
      .in_valid(kb_valid[l]), .in_ready(kb_ready[l]), .in_plane(kb_plane[l]),
      .in_tok(kb_tok[l]), .in_r(kb_r[l]),
      .sc_valid(sc_valid[l]), .sc_score(sc_score[l]), .sc_r(sc_r[l]),
      .req_valid(req_valid[l]), .req_ready(req_ready[l]), .req_tok(req_tok[l]),
      .req_r(req_r[l]),
      .fin_valid(fin_valid[l]), .fin_ready(fin_ready[l]), .fin_tok(fin_tok[l]),
      .fin_score(fin_score[l]),
      .retire(retire[l]), .pruned(pruned[l]), .sb_full(sb_full[l]));
    assign lane_busy[l] = kb_valid[l] && kb_ready[l];
  end

  lats_module #(.NL(NL), .NP(NP), .SW(SCORE_W), .TW(THR_W)) u_lats (
    .clk, .rst_n, .clear, .sc_valid, .sc_score, .sc_r, .m_min, .alpha, .radius,
    .eta, .max_lb, .have_max);

  a_kbuf_room: assert property (@(posedge clk) disable iff (!rst_n)
    (kbuf_wr & kb_full) == '0);
endmodule
