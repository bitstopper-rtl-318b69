// bit_margin_gen: bit margin generator with its margin LUT.
//
// Before the Key planes of a query are processed, this block derives twelve
// margin pairs (M^{r,min}, M^{r,max}), r = 0 (sign plane only known) .. 11
// (all planes known). After plane r the unknown Key bits are planes r+1..11,
// worth together 2^(NP-1-r) - 1 per element. Setting all of them to 1 where
// the Query element is positive and to 0 where it is negative gives the
// largest possible remainder; the opposite choice ("bit flipping") gives the
// smallest. Hence
//     M^{r,max} = P * (2^(NP-1-r) - 1),  P = sum of positive Query elements
//     M^{r,min} = N * (2^(NP-1-r) - 1),  N = sum of negative Query elements
// and M^{NP-1,*} = 0. A partial score A^r lies in [A^r+M^{r,min}, A^r+M^{r,max}].
// Timing: 'start' for one cycle; cycle 1 registers P and N (adder trees),
// cycle 2 writes all LUT entries and pulses 'done'. The LUT is read
// combinationally by the lanes and the LATS module and stays valid until the
// next start. The formula follows the paper's margin illustration; the
// two-cycle schedule and the parallel LUT fill are this design's choices.
module bit_margin_gen
  import bs_pkg::*;
#(
  parameter int DIM_P = DIM,
  parameter int QW_P  = QW,
  parameter int NP    = NPLANES,
  parameter int SW    = SCORE_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [DIM_P-1:0][QW_P-1:0] q,
  output logic signed [SW-1:0]       m_min [NP],
  output logic signed [SW-1:0]       m_max [NP],
  output logic                       done
);
  logic signed [SW-1:0] pos_c, neg_c, pos_q, neg_q;
  logic                 st1;

  always_comb begin
    pos_c = '0;
    neg_c = '0;
    for (int d = 0; d < DIM_P; d++) begin
      if (q[d][QW_P-1]) neg_c += SW'($signed(q[d]));
      else              pos_c += SW'($signed(q[d]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos_q <= '0;
      neg_q <= '0;
      st1   <= 1'b0;
      done  <= 1'b0;
      for (int r = 0; r < NP; r++) begin
        m_min[r] <= '0;
        m_max[r] <= '0;
      end
    end else begin
      st1  <= start;
      done <= st1;
      if (start) begin
        pos_q <= pos_c;
        neg_q <= neg_c;
      end
      if (st1) begin
        for (int r = 0; r < NP; r++) begin
          m_max[r] <= (pos_q <<< (NP - 1 - r)) - pos_q;
          m_min[r] <= (neg_q <<< (NP - 1 - r)) - neg_q;
        end
      end
    end
  end
endmodule
