// mac_array: one-dimensional 64-way 12b x 12b multiply-accumulate array.
//
// Each cycle with 'en' high, lane k adds w * v[k] to its accumulator, where
// w is the 12-bit unsigned softmax weight of one token (shared by all lanes)
// and v the token's 12-bit signed Value vector: 64 INT12 MACs per cycle, as
// in the paper. 'clear' zeroes the accumulators (new query). Accumulators
// are MAC_W = 40 bits, enough for 4096 products of 24 bits. Registered, one
// cycle latency; the accumulator width is this design's choice.
module mac_array
  import bs_pkg::*;
#(
  parameter int DIM_P = DIM,
  parameter int QW_P  = QW,
  parameter int AW    = MAC_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        en,
  input  logic [11:0]                 w,
  input  logic [DIM_P-1:0][QW_P-1:0]  v,
  output logic signed [AW-1:0]        acc [DIM_P]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DIM_P; k++) acc[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < DIM_P; k++) acc[k] <= '0;
    end else if (en) begin
      for (int k = 0; k < DIM_P; k++)
        acc[k] <= acc[k] + AW'($signed({1'b0, w})) * AW'($signed(v[k]));
    end
  end
endmodule
