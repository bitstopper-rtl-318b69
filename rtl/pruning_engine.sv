// pruning_engine: keep-or-prune decision of one PE lane.
//
// Adds the upper bit margin M^{r,max} of the current plane to the partial
// score A^r, giving the largest score the token can still reach, and keeps
// the token only if that bound is strictly greater than the broadcast LATS
// threshold eta (the paper's test A^r + M^{r,max} > eta). A kept token
// either requests its next plane r+1 or, after the last plane, is a final
// score for the V-PU; a pruned token is evicted from the scoreboard.
// Combinational.
module pruning_engine
  import bs_pkg::*;
#(
  parameter int NP = NPLANES,
  parameter int SW = SCORE_W,
  parameter int TW = THR_W
) (
  input  logic signed [SW-1:0] score,     // A^r_{i,j}
  input  logic signed [SW-1:0] margin_max,// M^{r,max}_i
  input  logic signed [TW-1:0] eta,       // threshold from the LATS module
  input  logic [RW-1:0]        r,
  output logic                 keep,      // survives this round
  output logic                 next_req,  // keep and another plane remains
  output logic                 final_score,// keep and this was the LSB plane
  output logic [RW-1:0]        next_r
);
  logic signed [TW-1:0] upper;
  always_comb begin
    upper       = TW'(score) + TW'(margin_max);
    keep        = upper > eta;
    next_req    = keep && (int'(r) < NP - 1);
    final_score = keep && (int'(r) == NP - 1);
    next_r      = r + RW'(1);
  end
endmodule
