// vpu: Value processing unit.
//
// Collects the final scores of the surviving tokens and turns them into the
// attention output O_i = sum_j softmax(a_j) * V_j.
//  * Score collection: a round-robin arbiter takes at most one final score per
//    cycle from the NL lanes and pushes the score into the Score-FIFO and
//    the token index into the IDX-FIFO. A lane whose final score is not taken
//    waits (fin_ready low).
//  * Value fetch: the memory controller drains the IDX-FIFO and returns the
//    Value vectors, in request order, into the V buffer (default 682 vectors,
//    the paper's 64 kB). Fetching overlaps the QK phase.
//  * Accumulation, after qk_done (the LATS maximum is then final): each cycle
//    one score and its Value vector are popped together; the softmax unit
//    gives the 12-bit weight w, the MAC array adds w * V_j to 64 accumulators
//    and w is added to the weight sum.
//  * Normalisation: a 33-cycle restoring divider forms 2^32 / sum(w); each
//    accumulator is multiplied by it, rounded and saturated to 12-bit signed
//    (same scale as V), and the 64-element vector enters the Output-FIFO.
//    vpu_done pulses when it has been pushed.
// The units (Score-/IDX-FIFO, V buffer, softmax, 64-way MAC, Output-FIFO)
// are the ones drawn in the paper; their sequencing, the deferred division
// and the FIFO depths (Score-/IDX-FIFO deep enough for a whole sequence) are
// this design's choices.
// Lint note: rst_n is reported as used both asynchronously and synchronously
// (SYNCASYNCNET). The synchronous use is only the 'disable iff (!rst_n)' of the
// handshake assertions; every flip-flop uses rst_n as an asynchronous reset.
module vpu
  import bs_pkg::*;
#(
  parameter int NL     = LANES,
  parameter int DIM_P  = DIM,
  parameter int QW_P   = QW,
  parameter int TOKW   = $clog2(MAX_SEQ),
  parameter int SFD    = MAX_SEQ,
  parameter int VDEPTH = (VBUF_BYTES * 8) / (DIM * QW),
  parameter int SW     = SCORE_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        qk_done,
  input  logic signed [THR_W-1:0]     max_score,
  input  logic [SMS_W-1:0]            sm_scale,
  // final scores from the lanes
  input  logic [NL-1:0]               fin_valid,
  output logic [NL-1:0]               fin_ready,
  input  logic [TOKW-1:0]             fin_tok   [NL],
  input  logic signed [SW-1:0]        fin_score [NL],
  // IDX-FIFO read side (memory controller)
  output logic                        vidx_valid,
  output logic [TOKW-1:0]             vidx_tok,
  input  logic                        vidx_pop,
  // V buffer write side (memory controller)
  input  logic                        vbuf_wr,
  input  logic [DIM_P*QW_P-1:0]       vbuf_data,
  output logic [$clog2(VDEPTH+1)-1:0] vbuf_count,
  // attention output
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [DIM_P-1:0][QW_P-1:0]  out_vec,
  output logic                        vpu_done,
  output logic                        collect_stall   // a final score waited
);
  localparam int LGL = (NL > 1) ? $clog2(NL) : 1;
  localparam int RB  = 32;
  localparam int PW  = MAC_W + RB + 2;

  // ---------------- collection ----------------
  logic [LGL-1:0] rr_ptr;
  logic           grant_any;
  logic [LGL-1:0] grant_idx;
  logic           sf_full, if_full, sf_empty, if_empty, vb_empty, vb_full;

  logic [LGL-1:0] cand;
  always_comb begin
    grant_any = 1'b0;
    grant_idx = '0;
    cand      = '0;
    for (int k = 0; k < NL; k++) begin
      cand = LGL'((int'(rr_ptr) + k) % NL);
      if (!grant_any && fin_valid[cand]) begin
        grant_any = 1'b1;
        grant_idx = cand;
      end
    end
    if (sf_full || if_full) grant_any = 1'b0;
    fin_ready = '0;
    if (grant_any) fin_ready[grant_idx] = 1'b1;
    collect_stall = |(fin_valid & ~fin_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         rr_ptr <= '0;
    else if (grant_any) rr_ptr <= (int'(grant_idx) == NL - 1) ? '0 : grant_idx + LGL'(1);
  end

  logic signed [SW-1:0] sf_head;
  logic           acc_fire;

  sync_fifo #(.W(SW), .DEPTH(SFD)) u_score_fifo (
    .clk, .rst_n, .clear,
    .push(grant_any), .wr_data(fin_score[grant_idx]),
    .pop(acc_fire), .rd_data(sf_head), .empty(sf_empty), .full(sf_full), .count());

  sync_fifo #(.W(TOKW), .DEPTH(SFD)) u_idx_fifo (
    .clk, .rst_n, .clear,
    .push(grant_any), .wr_data(fin_tok[grant_idx]),
    .pop(vidx_pop), .rd_data(vidx_tok), .empty(if_empty), .full(if_full), .count());
  assign vidx_valid = !if_empty;

  logic [DIM_P*QW_P-1:0] vb_head;
  sync_fifo #(.W(DIM_P*QW_P), .DEPTH(VDEPTH)) u_v_buffer (
    .clk, .rst_n, .clear,
    .push(vbuf_wr), .wr_data(vbuf_data),
    .pop(acc_fire), .rd_data(vb_head), .empty(vb_empty), .full(vb_full), .count(vbuf_count));

  // ---------------- accumulation ----------------
  typedef enum logic [2:0] {V_ACC, V_DIV, V_NORM, V_OUT, V_DONE} vstate_t;
  vstate_t vst;

  logic [11:0]     w12;
  softmax #(.SW(SW)) u_softmax (
    .score(sf_head), .max_score(max_score), .sm_scale(sm_scale),
    .x(), .p(), .p12(w12));

  logic signed [MAC_W-1:0] acc [DIM_P];
  assign acc_fire = (vst == V_ACC) && qk_done && !sf_empty && !vb_empty;

  mac_array #(.DIM_P(DIM_P), .QW_P(QW_P), .AW(MAC_W)) u_mac (
    .clk, .rst_n, .clear, .en(acc_fire), .w(w12), .v(vb_head), .acc(acc));

  logic [31:0]   wsum, rem, den;
  logic [RB:0]   quo;
  logic [5:0]    div_i;
  logic [DIM_P-1:0][QW_P-1:0] res;
  logic          of_full, of_empty;

  logic signed [PW-1:0] prod [DIM_P];
  logic signed [PW-1:0] rnd  [DIM_P];
  always_comb begin
    for (int k = 0; k < DIM_P; k++) begin
      prod[k] = PW'(acc[k]) * PW'($signed({1'b0, quo}));
      rnd[k]  = (prod[k] + (PW'(1) <<< (RB - 1))) >>> RB;
      if (rnd[k] > PW'(2 ** (QW_P - 1) - 1))       res[k] = QW_P'(2 ** (QW_P - 1) - 1);
      else if (rnd[k] < -PW'(2 ** (QW_P - 1)))     res[k] = QW_P'(-(2 ** (QW_P - 1)));
      else                                         res[k] = QW_P'(rnd[k]);
    end
  end

  // next partial remainder of the restoring divider
  logic [32:0] r2;
  assign r2 = {rem, (int'(div_i) == RB) ? 1'b1 : 1'b0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vst      <= V_ACC;
      wsum     <= '0;
      rem      <= '0;
      den      <= '0;
      quo      <= '0;
      div_i    <= '0;
      vpu_done <= 1'b0;
    end else if (clear) begin
      vst      <= V_ACC;
      wsum     <= '0;
      vpu_done <= 1'b0;
    end else begin
      vpu_done <= 1'b0;
      case (vst)
        V_ACC: begin
          if (acc_fire) wsum <= wsum + 32'(w12);
          if (qk_done && sf_empty) begin
            vst   <= V_DIV;
            rem   <= '0;
            quo   <= '0;
            den   <= wsum;
            div_i <= 6'(RB);
          end
        end
        V_DIV: begin
          // restoring division of 2^RB by den, one quotient bit per cycle
          if (den != 0 && r2 >= {1'b0, den}) begin
            rem <= 32'(r2 - {1'b0, den});
            quo[div_i] <= 1'b1;
          end else begin
            rem <= r2[31:0];
          end
          if (div_i == '0) vst <= V_NORM;
          else             div_i <= div_i - 6'd1;
        end
        V_NORM: if (!of_full) vst <= V_OUT;
        V_OUT:  begin
          vst      <= V_DONE;
          vpu_done <= 1'b1;
        end
        default: ;
      endcase
    end
  end

  sync_fifo #(.W(DIM_P*QW_P), .DEPTH(2)) u_output_fifo (
    .clk, .rst_n, .clear(1'b0),
    .push(vst == V_NORM && !of_full), .wr_data(res),
    .pop(out_valid && out_ready), .rd_data(out_vec), .empty(of_empty), .full(of_full),
    .count());
  assign out_valid = !of_empty;

  a_pairs: assert property (@(posedge clk) disable iff (!rst_n)
    vbuf_wr |-> !vb_full);
endmodule
