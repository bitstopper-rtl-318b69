// softmax: LUT-based exponential unit of the V-PU (18-bit in, 18-bit out).
//
// Computes the unnormalised softmax weight of one surviving token,
//     p = 2^(-x),   x = (m - a) * sm_scale / 2^24  (x in Q8.10),
// where a is the token's exact score, m the largest score of the query (from
// the LATS module, so x >= 0) and sm_scale folds the Query and Key
// quantisation scales, 1/sqrt(d_h), log2(e) and 2^10 into one factor set by
// software. x is saturated to 18 bits, Q8.10. Its integer part is a right
// shift; the top six fraction bits address a 64-entry table
//     lut[f] = round(2^17 * 2^(-f/64)),  f = 0..63
// giving p as an 18-bit Q1.17 number (1.0 = 2^17 for the largest token).
// p12 is p rounded down to the 12-bit unsigned weight fed to the 12b x 12b
// MAC array (p >> 6, at most 2048). Division by the sum of weights happens
// after accumulation, in the V-PU. Combinational.
// The paper gives only "18-bit input, 18-bit output LUT-based"; the base-2
// formulation, table size and formats are this design's choices.
module softmax
  import bs_pkg::*;
#(
  parameter int SW = SCORE_W
) (
  input  logic signed [SW-1:0]  score,
  input  logic signed [THR_W-1:0] max_score,
  input  logic [SMS_W-1:0]      sm_scale,
  output logic [SM_W-1:0]       x,      // 18-bit softmax input, Q8.10
  output logic [SM_W-1:0]       p,      // 18-bit softmax output, Q1.17
  output logic [11:0]           p12
);
  logic signed [THR_W-1:0] d;
  logic [THR_W+SMS_W-1:0]  prod;
  logic [THR_W+SMS_W-1:0]  xs;
  logic [SM_W-1:0]         lut;

  always_comb begin
    d    = max_score - THR_W'(score);
    if (d < 0) d = '0;
    prod = (THR_W+SMS_W)'(d) * (THR_W+SMS_W)'(sm_scale);
    xs   = prod >> 24;
    x    = (xs > (THR_W+SMS_W)'({SM_W{1'b1}})) ? {SM_W{1'b1}} : xs[SM_W-1:0];
    case (x[9:4])
      6'd0: lut = 18'd131072;
      6'd1: lut = 18'd129660;
      6'd2: lut = 18'd128263;
      6'd3: lut = 18'd126882;
      6'd4: lut = 18'd125515;
      6'd5: lut = 18'd124163;
      6'd6: lut = 18'd122825;
      6'd7: lut = 18'd121502;
      6'd8: lut = 18'd120194;
      6'd9: lut = 18'd118899;
      6'd10: lut = 18'd117618;
      6'd11: lut = 18'd116351;
      6'd12: lut = 18'd115098;
      6'd13: lut = 18'd113858;
      6'd14: lut = 18'd112631;
      6'd15: lut = 18'd111418;
      6'd16: lut = 18'd110218;
      6'd17: lut = 18'd109031;
      6'd18: lut = 18'd107856;
      6'd19: lut = 18'd106694;
      6'd20: lut = 18'd105545;
      6'd21: lut = 18'd104408;
      6'd22: lut = 18'd103283;
      6'd23: lut = 18'd102171;
      6'd24: lut = 18'd101070;
      6'd25: lut = 18'd99982;
      6'd26: lut = 18'd98905;
      6'd27: lut = 18'd97839;
      6'd28: lut = 18'd96785;
      6'd29: lut = 18'd95743;
      6'd30: lut = 18'd94711;
      6'd31: lut = 18'd93691;
      6'd32: lut = 18'd92682;
      6'd33: lut = 18'd91684;
      6'd34: lut = 18'd90696;
      6'd35: lut = 18'd89719;
      6'd36: lut = 18'd88752;
      6'd37: lut = 18'd87796;
      6'd38: lut = 18'd86851;
      6'd39: lut = 18'd85915;
      6'd40: lut = 18'd84990;
      6'd41: lut = 18'd84074;
      6'd42: lut = 18'd83169;
      6'd43: lut = 18'd82273;
      6'd44: lut = 18'd81386;
      6'd45: lut = 18'd80510;
      6'd46: lut = 18'd79642;
      6'd47: lut = 18'd78785;
      6'd48: lut = 18'd77936;
      6'd49: lut = 18'd77096;
      6'd50: lut = 18'd76266;
      6'd51: lut = 18'd75444;
      6'd52: lut = 18'd74632;
      6'd53: lut = 18'd73828;
      6'd54: lut = 18'd73032;
      6'd55: lut = 18'd72246;
      6'd56: lut = 18'd71468;
      6'd57: lut = 18'd70698;
      6'd58: lut = 18'd69936;
      6'd59: lut = 18'd69183;
      6'd60: lut = 18'd68438;
      6'd61: lut = 18'd67700;
      6'd62: lut = 18'd66971;
      6'd63: lut = 18'd66250;
      default: lut = '0;
    endcase
    p   = (x[17:10] >= 8'd18) ? '0 : (lut >> x[17:10]);
    p12 = 12'(p >> 6);
  end
endmodule
