// pe_lane: one bit-level PE lane of the QK-PU.
//
// Consumes one Key bit plane per cycle from its K-buffer bank, in whatever
// order planes come back from memory (bit-level asynchronous processing).
// Stage 1 (combinational, registered at its end): the BRAT forms the plane
//   term and adds it to the partial score found in the scoreboard under the
//   token's tag (miss = first plane, start from zero).
// Stage 2: the pruning engine compares A^r + M^{r,max} with eta. Kept tokens
//   either request plane r+1 (partial score written back to the scoreboard)
//   or, after the last plane, send their final score to the V-PU; pruned and
//   finished tokens are evicted and reported as retired so the scheduler can
//   fetch the next Key. Every stage-2 score also goes to the LATS module with
//   its plane index, where it updates the running maximum of lower bounds.
// Stage 2 holds when the request or the final-score port is not ready, and
// stage 1 holds behind it (in_ready low).
// The BRAT / scoreboard / pruning-engine split and the decision rule follow
// the paper; the two-stage timing and valid/ready handshakes are this
// design's own choices.
// Lint note: rst_n is reported as used both asynchronously and synchronously
// (SYNCASYNCNET). The synchronous use is only the 'disable iff (!rst_n)' of the
// handshake assertions; every flip-flop uses rst_n as an asynchronous reset.
module pe_lane
  import bs_pkg::*;
#(
  parameter int DIM_P = DIM,
  parameter int QW_P  = QW,
  parameter int NP    = NPLANES,
  parameter int NL    = LANES,      // lanes, token j lives in lane j % NL
  parameter int TOKW  = $clog2(MAX_SEQ),
  parameter int SBD   = SB_DEPTH,
  parameter int SW    = SCORE_W,
  parameter int TW    = THR_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic [DIM_P-1:0][QW_P-1:0]  q,
  input  logic signed [SW-1:0]        margin_max [NP],
  input  logic signed [TW-1:0]        eta,
  // incoming bit plane
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [DIM_P-1:0]            in_plane,
  input  logic [TOKW-1:0]             in_tok,
  input  logic [RW-1:0]               in_r,
  // score to LATS
  output logic                        sc_valid,
  output logic signed [SW-1:0]        sc_score,
  output logic [RW-1:0]               sc_r,
  // next bit-plane request
  output logic                        req_valid,
  input  logic                        req_ready,
  output logic [TOKW-1:0]             req_tok,
  output logic [RW-1:0]               req_r,
  // final score to the V-PU
  output logic                        fin_valid,
  input  logic                        fin_ready,
  output logic [TOKW-1:0]             fin_tok,
  output logic signed [SW-1:0]        fin_score,
  // token left the lane (pruned or finished), and whether it was pruned
  output logic                        retire,
  output logic                        pruned,
  output logic                        sb_full
);
  localparam int LGL = $clog2(NL);

  function automatic logic [SB_TOK_W-1:0] tag_of(input logic [TOKW-1:0] t);
    return SB_TOK_W'(t >> LGL);
  endfunction

  // ---------------- stage 1 ----------------
  logic                 lk_hit;
  logic [RW-1:0]        lk_bit;
  logic signed [SW-1:0] lk_score, s1_next_score;

  brat #(.DIM_P(DIM_P), .QW_P(QW_P), .NP(NP), .SW(SW)) u_brat (
    .q(q), .kplane(in_plane), .r(in_r), .hit(lk_hit), .psum(lk_score),
    .delta(), .score(s1_next_score));

  logic                 s1_valid;
  logic [TOKW-1:0]      s1_tok;
  logic [RW-1:0]        s1_r;
  logic signed [SW-1:0] s1_score;

  // ---------------- stage 2 ----------------
  logic keep, nreq, fsc;
  logic [RW-1:0] nr;
  pruning_engine #(.NP(NP), .SW(SW), .TW(TW)) u_pe (
    .score(s1_score), .margin_max(margin_max[s1_r]), .eta(eta), .r(s1_r),
    .keep(keep), .next_req(nreq), .final_score(fsc), .next_r(nr));

  logic s2_fire;
  always_comb begin
    req_valid = s1_valid && nreq;
    req_tok   = s1_tok;
    req_r     = nr;
    fin_valid = s1_valid && fsc;
    fin_tok   = s1_tok;
    fin_score = s1_score;
    s2_fire   = s1_valid && (!nreq || req_ready) && (!fsc || fin_ready);
    in_ready  = (!s1_valid || s2_fire) && !clear;
    sc_valid  = s2_fire;
    sc_score  = s1_score;
    sc_r      = s1_r;
    retire    = s2_fire && !nreq;
    pruned    = s2_fire && !keep;
  end

  scoreboard #(.DEPTH(SBD), .TW(SB_TOK_W), .SW(SW)) u_sb (
    .clk, .rst_n, .clear,
    .lk_tag(tag_of(in_tok)), .lk_hit, .lk_bit, .lk_score,
    .upd_valid(s2_fire), .upd_keep(nreq), .upd_tag(tag_of(s1_tok)),
    .upd_bit(s1_r), .upd_score(s1_score), .full(sb_full),
    .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_tok   <= '0;
      s1_r     <= '0;
      s1_score <= '0;
    end else if (clear) begin
      s1_valid <= 1'b0;
    end else if (in_ready) begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_tok   <= in_tok;
        s1_r     <= in_r;
        s1_score <= s1_next_score;
      end
    end
  end

  // a plane must follow the one stored for its token (or be the sign plane)
  a_plane_order: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && in_ready |-> (lk_hit ? (in_r == lk_bit + RW'(1)) : (in_r == '0)))
    else $error("plane %0d of token %0d out of order", $sampled(in_r), $sampled(in_tok));
endmodule
