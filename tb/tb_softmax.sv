// tb_softmax: checks the exponent unit against real arithmetic: the 18-bit
// input x must equal (m - a) * sm_scale / 2^24 (saturated), the 18-bit output
// must be within 2 LSB plus the truncation of the table step of
// 2^17 * 2^(-x/1024), and p12 must be p / 64. Covers a = m (p = 2^17) and
// saturation far below the maximum.
module tb_softmax;
  import bs_pkg::*;
  logic signed [SCORE_W-1:0] score;
  logic signed [THR_W-1:0]   max_score;
  logic [SMS_W-1:0]          sm_scale;
  logic [SM_W-1:0]           x, p;
  logic [11:0]               p12;
  int checks = 0, failures = 0;

  softmax dut (.*);

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint d, xe;
      real pe, tol;
      max_score = THR_W'($signed($urandom) >>> 2);
      d = (t == 0) ? 0 : (t < 100) ? longint'($urandom % 1000) : longint'($urandom % 200000000);
      score = SCORE_W'(longint'(max_score) - d);
      sm_scale = SMS_W'($urandom % 30000 + 1);
      #1;
      xe = (d * longint'(sm_scale)) >>> 24;
      if (xe > 262143) xe = 262143;
      pe = 131072.0 * (2.0 ** (-real'(xe) / 1024.0));
      // the table index drops the low 4 fraction bits: p may exceed by up to 1/64 octave
      tol = 2.0 + pe * 0.011;
      checks++;
      if (longint'(x) != xe || real'(p) > pe + tol || real'(p) < pe - 2.0 || p12 != 12'(p >> 6)) begin
        failures++;
        if (failures < 10) $display("FAIL d=%0d x=%0d/%0d p=%0d exp %f", d, x, xe, p, pe);
      end
      if (t == 0) begin
        checks++;
        if (p != 18'd131072 || p12 != 12'd2048) begin failures++; $display("FAIL p at max"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
