// bitstopper_top: bit-serial, early-terminating attention accelerator.
//
// For one query Q_i at a time it computes O_i = softmax(Q_i K^T) V over the
// tokens that matter, reading each Key only to as many bits as needed:
//   scheduler         - phases (margin LUT, QK, V) and new-Key issue per lane
//   qk_pu             - Q/K buffers, 32 bit-level PE lanes, LATS, margin LUT
//   memory_controller - Key-plane and Value requests towards DRAM
//   vpu               - Score/IDX FIFOs, V buffer, softmax, MAC, output
// Host interface: write Query vectors with q_wr_*; pulse 'start' with
// q_idx, seq_len (number of Keys), Key / Value base addresses, alpha (Q1.8),
// radius (score units) and the softmax scale; the 64-element 12-bit output
// vector appears on out_* and 'done' pulses when the query is finished.
// Memory interface: NL Key-plane ports (64-bit word address, tag {j, r},
// replies in any order, never back-pressured) and one Value port (768-bit
// vectors, replies in request order). The DRAM itself is outside.
// Event outputs (one bit per lane where relevant) expose the mechanisms for
// performance counting: pruning, window stall, lane idle while planes are in
// flight, and final-score collection stall.
// Lint note: rst_n is reported as used both asynchronously and synchronously
// (SYNCASYNCNET). The synchronous use is only the 'disable iff (!rst_n)' of the
// handshake assertions in its sub-blocks; every flip-flop uses rst_n as an asynchronous reset.
module bitstopper_top
  import bs_pkg::*;
#(
  parameter int NL     = LANES,
  parameter int DIM_P  = DIM,
  parameter int QW_P   = QW,
  parameter int NP     = NPLANES,
  parameter int TOKW   = $clog2(MAX_SEQ),
  parameter int SBD    = SB_DEPTH,
  parameter int QDEPTH = (QBUF_BYTES * 8) / (DIM * QW),
  parameter int KDEPTH = (KBUF_BYTES * 8) / (LANES * DIM),
  parameter int VDEPTH = (VBUF_BYTES * 8) / (DIM * QW),
  parameter int SFD    = MAX_SEQ
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host
  input  logic                        q_wr_en,
  input  logic [$clog2(QDEPTH)-1:0]   q_wr_addr,
  input  logic [DIM_P-1:0][QW_P-1:0]  q_wr_data,
  input  logic                        start,
  input  logic [$clog2(QDEPTH)-1:0]   q_idx,
  input  logic [TOKW:0]               seq_len,
  input  logic [ADDR_W-1:0]           k_base,
  input  logic [ADDR_W-1:0]           v_base,
  input  logic [ALPHA_W-1:0]          alpha,
  input  logic [RAD_W-1:0]            radius,
  input  logic [SMS_W-1:0]            sm_scale,
  output logic                        busy,
  output logic                        done,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [DIM_P-1:0][QW_P-1:0]  out_vec,
  // DRAM Key-plane ports
  output logic [NL-1:0]               kreq_valid,
  input  logic [NL-1:0]               kreq_ready,
  output logic [ADDR_W-1:0]           kreq_addr [NL],
  output logic [TOKW+RW-1:0]          kreq_tag  [NL],
  input  logic [NL-1:0]               krsp_valid,
  input  logic [DIM_P-1:0]            krsp_data [NL],
  input  logic [TOKW+RW-1:0]          krsp_tag  [NL],
  // DRAM Value port
  output logic                        vreq_valid,
  input  logic                        vreq_ready,
  output logic [ADDR_W-1:0]           vreq_addr,
  input  logic                        vrsp_valid,
  input  logic [DIM_P*QW_P-1:0]       vrsp_data,
  // events
  output logic [NL-1:0]               ev_pruned,
  output logic [NL-1:0]               ev_final,
  output logic [NL-1:0]               ev_win_stall,
  output logic [NL-1:0]               ev_lane_wait,
  output logic                        ev_collect_stall
);
  logic clear, q_rd_en, bmg_start, bmg_done, qk_active, qk_done, vpu_done;
  logic [NL-1:0] new_valid, new_ready, retire, pruned, lane_busy;
  logic [TOKW-1:0] new_tok [NL];
  logic signed [THR_W-1:0] max_lb, eta;

  // latched query configuration
  logic [TOKW:0]             seq_len_r;
  logic [ADDR_W-1:0]         k_base_r, v_base_r;
  logic [ALPHA_W-1:0]        alpha_r;
  logic [RAD_W-1:0]          radius_r;
  logic [SMS_W-1:0]          sm_scale_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq_len_r  <= '0;
      k_base_r   <= '0;
      v_base_r   <= '0;
      alpha_r    <= '0;
      radius_r   <= '0;
      sm_scale_r <= '0;
    end else if (clear) begin
      seq_len_r  <= seq_len;
      k_base_r   <= k_base;
      v_base_r   <= v_base;
      alpha_r    <= alpha;
      radius_r   <= radius;
      sm_scale_r <= sm_scale;
    end
  end

  scheduler #(.NL(NL), .TOKW(TOKW), .WINDOW(SBD)) u_sched (
    .clk, .rst_n, .start, .seq_len(seq_len_r), .busy, .done,
    .q_rd_en, .bmg_start, .bmg_done, .clear, .qk_active, .qk_done, .vpu_done,
    .new_valid, .new_ready, .new_tok, .retire, .win_stall(ev_win_stall));

  logic [NL-1:0]         lreq_valid, lreq_ready, kbuf_wr, fin_valid, fin_ready, new_blocked;
  logic [TOKW-1:0]       lreq_tok [NL], kbuf_tok [NL], fin_tok [NL];
  logic [RW-1:0]         lreq_r [NL], kbuf_r [NL];
  logic [DIM_P-1:0]      kbuf_plane [NL];
  logic signed [SCORE_W-1:0] fin_score [NL];

  qk_pu #(.NL(NL), .DIM_P(DIM_P), .QW_P(QW_P), .NP(NP), .TOKW(TOKW), .SBD(SBD),
          .QDEPTH(QDEPTH), .KDEPTH(KDEPTH)) u_qkpu (
    .clk, .rst_n, .clear,
    .q_wr_en, .q_wr_addr, .q_wr_data, .q_rd_en, .q_rd_addr(q_idx),
    .bmg_start, .bmg_done, .alpha(alpha_r), .radius(radius_r),
    .kbuf_wr, .kbuf_plane, .kbuf_tok, .kbuf_r,
    .req_valid(lreq_valid), .req_ready(lreq_ready), .req_tok(lreq_tok), .req_r(lreq_r),
    .fin_valid, .fin_ready, .fin_tok, .fin_score,
    .retire, .pruned, .lane_busy, .max_lb, .eta);

  logic                 vidx_valid, vidx_pop, vbuf_wr;
  logic [TOKW-1:0]      vidx_tok;
  logic [DIM_P*QW_P-1:0] vbuf_data;
  logic [$clog2(VDEPTH+1)-1:0] vbuf_count;

  memory_controller #(.NL(NL), .DIM_P(DIM_P), .QW_P(QW_P), .TOKW(TOKW), .VDEPTH(VDEPTH)) u_mc (
    .clk, .rst_n, .k_base(k_base_r), .v_base(v_base_r), .seq_len(seq_len_r),
    .lane_valid(lreq_valid), .lane_ready(lreq_ready), .lane_tok(lreq_tok), .lane_r(lreq_r),
    .new_valid, .new_ready, .new_tok,
    .kreq_valid, .kreq_ready, .kreq_addr, .kreq_tag, .krsp_valid, .krsp_data, .krsp_tag,
    .kbuf_wr, .kbuf_plane, .kbuf_tok, .kbuf_r,
    .vidx_valid, .vidx_tok, .vidx_pop, .vbuf_count,
    .vreq_valid, .vreq_ready, .vreq_addr, .vrsp_valid, .vrsp_data, .vbuf_wr, .vbuf_data,
    .new_blocked);

  vpu #(.NL(NL), .DIM_P(DIM_P), .QW_P(QW_P), .TOKW(TOKW), .SFD(SFD), .VDEPTH(VDEPTH),
        .SW(SCORE_W)) u_vpu (
    .clk, .rst_n, .clear, .qk_done, .max_score(max_lb), .sm_scale(sm_scale_r),
    .fin_valid, .fin_ready, .fin_tok, .fin_score,
    .vidx_valid, .vidx_tok, .vidx_pop, .vbuf_wr, .vbuf_data, .vbuf_count,
    .out_valid, .out_ready, .out_vec, .vpu_done, .collect_stall(ev_collect_stall));

  assign ev_pruned    = pruned;
  assign ev_final     = fin_valid & fin_ready;
  assign ev_lane_wait = qk_active ? ~lane_busy : '0;
endmodule
