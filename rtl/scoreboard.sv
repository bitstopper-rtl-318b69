// scoreboard: per-lane store of partial scores of tokens still in flight.
//
// DEPTH entries of {valid, token tag, bit index, partial score}; with the
// defaults 1 + 8 + 4 + 32 = 45 bits, the entry size printed in the paper's
// hardware table. Lookup is associative on the token tag and combinational:
// hit, the stored partial score and the stored bit index appear in the same
// cycle (the paper's "Hit" signal). One update per cycle, registered:
//   upd_keep = 1 : write {tag, bit, score}; reuse the matching entry or, for a
//                  token seen for the first time, allocate the lowest free one;
//   upd_keep = 0 : evict the matching entry (pruned or finished token).
// The split into 8-bit tag and 4-bit bit index is this design's reading of
// the 45-bit entry; the tag is the token's index within its lane (token / LANES).
// 'full' tells the controller no new token may be admitted.
// Lint note: rst_n is reported as used both asynchronously and synchronously
// (SYNCASYNCNET). The synchronous use is only the 'disable iff (!rst_n)' of the
// handshake assertions; every flip-flop uses rst_n as an asynchronous reset.
module scoreboard
  import bs_pkg::*;
#(
  parameter int DEPTH = SB_DEPTH,
  parameter int TW    = SB_TOK_W,
  parameter int SW    = SCORE_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,       // drop every entry (new query)
  // lookup
  input  logic [TW-1:0]        lk_tag,
  output logic                 lk_hit,
  output logic [RW-1:0]        lk_bit,
  output logic signed [SW-1:0] lk_score,
  // update / evict
  input  logic                 upd_valid,
  input  logic                 upd_keep,
  input  logic [TW-1:0]        upd_tag,
  input  logic [RW-1:0]        upd_bit,
  input  logic signed [SW-1:0] upd_score,
  output logic                 full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  typedef struct packed {
    logic                 v;
    logic [TW-1:0]        tag;
    logic [RW-1:0]        bidx;
    logic signed [SW-1:0] score;
  } entry_t;

  entry_t tab [DEPTH];

  always_comb begin
    lk_hit   = 1'b0;
    lk_bit   = '0;
    lk_score = '0;
    for (int e = 0; e < DEPTH; e++) begin
      if (tab[e].v && tab[e].tag == lk_tag) begin
        lk_hit   = 1'b1;
        lk_bit   = tab[e].bidx;
        lk_score = tab[e].score;
      end
    end
  end

  // entry to write: matching entry if any, else lowest free entry
  logic                     m_found, f_found;
  logic [$clog2(DEPTH)-1:0] m_idx, f_idx;
  always_comb begin
    m_found = 1'b0; m_idx = '0;
    f_found = 1'b0; f_idx = '0;
    count   = '0;
    for (int e = DEPTH - 1; e >= 0; e--) begin
      if (tab[e].v && tab[e].tag == upd_tag) begin
        m_found = 1'b1; m_idx = ($clog2(DEPTH))'(e);
      end
      if (!tab[e].v) begin
        f_found = 1'b1; f_idx = ($clog2(DEPTH))'(e);
      end
      if (tab[e].v) count++;
    end
    full = !f_found;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < DEPTH; e++) tab[e] <= '0;
    end else if (clear) begin
      for (int e = 0; e < DEPTH; e++) tab[e].v <= 1'b0;
    end else if (upd_valid) begin
      if (upd_keep) begin
        if (m_found)      tab[m_idx] <= '{1'b1, upd_tag, upd_bit, upd_score};
        else if (f_found) tab[f_idx] <= '{1'b1, upd_tag, upd_bit, upd_score};
      end else if (m_found) begin
        tab[m_idx].v <= 1'b0;
      end
    end
  end

  // a new token must find a free entry
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    upd_valid && upd_keep && !m_found |-> f_found);
endmodule
