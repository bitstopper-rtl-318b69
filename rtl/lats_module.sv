// lats_module: lightweight adaptive token selection threshold.
//
// Every cycle each lane may report one partial score A^r with its plane
// index r. The module adds the lower margin M^{r,min} to each (lower bound of
// the token's final score), takes the maximum over the lanes and over all
// earlier reports of this query ("updating max") and derives
//     eta = max - alpha * radius
// which is broadcast to every lane. alpha is Q1.8 (256 = 1.0); radius is in
// integer score units, i.e. the paper's radius (5) divided by the product of
// the Query and Key quantisation scales, set by software. Lower bounds only
// grow as planes arrive, so the running maximum never overstates the largest
// final score and eta never prunes a token that could reach max - alpha*radius.
// Before the first report of a query eta is the most negative value (keep all).
// Timing: the maximum register updates at the clock edge after the reports;
// eta is combinational from that register. 'clear' starts a new query.
// The rule follows the paper's threshold equation and LATS figure; the
// fixed-point formats and the one-cycle update are this design's choices.
module lats_module
  import bs_pkg::*;
#(
  parameter int NL = LANES,
  parameter int NP = NPLANES,
  parameter int SW = SCORE_W,
  parameter int TW = THR_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic [NL-1:0]         sc_valid,
  input  logic signed [SW-1:0]  sc_score [NL],
  input  logic [RW-1:0]         sc_r [NL],
  input  logic signed [SW-1:0]  m_min [NP],
  input  logic [ALPHA_W-1:0]    alpha,
  input  logic [RAD_W-1:0]      radius,
  output logic signed [TW-1:0]  eta,
  output logic signed [TW-1:0]  max_lb,
  output logic                  have_max
);
  logic signed [TW-1:0] cyc_max, lb;
  logic                 cyc_any;
  logic [ALPHA_W+RAD_W-1:0] off_full;
  logic signed [TW-1:0]     off;

  always_comb begin
    cyc_max = '0;
    cyc_any = 1'b0;
    for (int l = 0; l < NL; l++) begin
      lb = TW'(sc_score[l]) + TW'(m_min[sc_r[l]]);
      if (sc_valid[l] && (!cyc_any || lb > cyc_max)) begin
        cyc_max = lb;
        cyc_any = 1'b1;
      end
    end
    off_full = alpha * radius;
    off      = TW'(off_full >> 8);
    eta      = have_max ? (max_lb - off) : {1'b1, {(TW-1){1'b0}}};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_lb   <= '0;
      have_max <= 1'b0;
    end else if (clear) begin
      max_lb   <= '0;
      have_max <= 1'b0;
    end else if (cyc_any && (!have_max || cyc_max > max_lb)) begin
      max_lb   <= cyc_max;
      have_max <= 1'b1;
    end
  end
endmodule
