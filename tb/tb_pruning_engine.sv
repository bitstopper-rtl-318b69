// tb_pruning_engine: random scores, margins and thresholds against the rule
// keep = (A + M^{r,max} > eta); request plane r+1 unless r is the last plane.
module tb_pruning_engine;
  import bs_pkg::*;
  logic signed [SCORE_W-1:0] score, margin_max;
  logic signed [THR_W-1:0]   eta;
  logic [RW-1:0]             r, next_r;
  logic keep, next_req, final_score;
  int checks = 0, failures = 0;

  pruning_engine dut (.*);

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      longint up;
      bit ek;
      score      = $signed($urandom) >>> 3;
      margin_max = $signed($urandom % (1 << 28));
      r          = RW'($urandom % NPLANES);
      case (t % 4)
        0: eta = THR_W'(longint'(score) + longint'(margin_max));       // equal: prune
        1: eta = THR_W'(longint'(score) + longint'(margin_max) - 1);   // just below: keep
        2: eta = {1'b1, {(THR_W-1){1'b0}}};
        default: eta = THR_W'($signed($urandom) >>> 2);
      endcase
      #1;
      up = longint'(score) + longint'(margin_max);
      ek = up > longint'(eta);
      checks++;
      if (keep != ek || next_req != (ek && r < NPLANES - 1) ||
          final_score != (ek && r == NPLANES - 1) || next_r != r + 1) begin
        failures++;
        $display("FAIL up=%0d eta=%0d r=%0d keep=%0d", up, eta, r, keep);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
