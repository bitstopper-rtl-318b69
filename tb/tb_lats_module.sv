// tb_lats_module: random lane reports (score, plane) against a model that keeps
// the maximum of score + M^{r,min} over everything reported since 'clear' and
// derives eta = max - (alpha * radius >> 8); eta is the most negative value
// before the first report.
module tb_lats_module;
  import bs_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  always #1 clk = ~clk;
  logic [LANES-1:0] sc_valid;
  logic signed [SCORE_W-1:0] sc_score [LANES];
  logic [RW-1:0] sc_r [LANES];
  logic signed [SCORE_W-1:0] m_min [NPLANES];
  logic [ALPHA_W-1:0] alpha;
  logic [RAD_W-1:0] radius;
  logic signed [THR_W-1:0] eta, max_lb;
  logic have_max;
  int checks = 0, failures = 0;

  lats_module dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    longint mx;
    bit have;
    sc_valid = '0;
    for (int l = 0; l < LANES; l++) begin sc_score[l] = 0; sc_r[l] = 0; end
    for (int r = 0; r < NPLANES; r++) m_min[r] = -SCORE_W'((NPLANES - 1 - r) * 1000);
    alpha = 9'd154; radius = 32'd100000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      clear = 1; @(negedge clk); clear = 0;
      have = 0; mx = 0;
      for (int t = 0; t < 300; t++) begin
        longint exp_eta;
        exp_eta = have ? mx - ((longint'(alpha) * longint'(radius)) >>> 8) : -(64'sd1 <<< (THR_W - 1));
        checks++;
        if (longint'(eta) != exp_eta || have_max != have) begin
          failures++;
          $display("FAIL eta %0d exp %0d", eta, exp_eta);
        end
        for (int l = 0; l < LANES; l++) begin
          sc_valid[l] = ($urandom % 8) == 0;
          sc_score[l] = $signed($urandom) >>> (4 + round);
          sc_r[l]     = RW'($urandom % NPLANES);
          if (sc_valid[l]) begin
            longint lb;
            lb = longint'(sc_score[l]) + longint'(m_min[sc_r[l]]);
            if (!have || lb > mx) begin mx = lb; have = 1; end
          end
        end
        @(negedge clk);
        sc_valid = '0;
      end
      alpha = 9'(64 * round + 51); radius = 32'($urandom % 100000000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
