// brat: bit-serial reusable ANDer tree of one PE lane.
//
// Each of the DIM_P Query elements (QW_P-bit two's complement) is ANDed with
// the matching bit of one Key bit plane and the DIM_P products are summed by
// an adder tree. Plane r = 0 is the Key sign bit, whose weight is
// -2^(NP-1); plane r >= 1 has weight +2^(NP-1-r). The tree sum is therefore
// negated for r = 0 and shifted left by NP-1-r, which yields the exact
// contribution DeltaA^r of this plane to Q.K. The result is added to the
// partial score reused from the scoreboard (hit = 1) or to zero when this is
// the first plane of a token (hit = 0, "inner product starts").
// Purely combinational; the 32-bit score register sits in pe_lane.
// The AND / adder tree / negate / shift / add chain follows the lane figure
// of the paper; doing the shift on the plane term (not on the stored score)
// is this design's choice, so stored partial scores are true partial values.
module brat
  import bs_pkg::*;
#(
  parameter int DIM_P = DIM,
  parameter int QW_P  = QW,
  parameter int NP    = NPLANES,
  parameter int SW    = SCORE_W
) (
  input  logic [DIM_P-1:0][QW_P-1:0] q,       // Query vector, signed elements
  input  logic [DIM_P-1:0]           kplane,  // one bit plane of a Key vector
  input  logic [RW-1:0]              r,       // plane index, 0 = sign plane
  input  logic                       hit,     // a partial score exists
  input  logic signed [SW-1:0]       psum,    // partial score A^{r-1}
  output logic signed [SW-1:0]       delta,   // weighted plane term DeltaA^r
  output logic signed [SW-1:0]       score    // A^r = A^{r-1} + DeltaA^r
);
  logic signed [SW-1:0] tree_sum;

  always_comb begin
    tree_sum = '0;
    for (int d = 0; d < DIM_P; d++) begin
      if (kplane[d]) tree_sum += SW'($signed(q[d]));
    end
    if (r == '0) delta = (-tree_sum) <<< (NP - 1);
    else         delta = tree_sum <<< (NP - 1 - int'(r));
    score = (hit ? psum : '0) + delta;
  end
endmodule
