// tb_brat: checks the ANDer tree against a per-element reference: the plane
// term is sum(k_d * q_d) times -2^11 for the sign plane and 2^(11-r) otherwise,
// added to the reused partial score only on a hit.
module tb_brat;
  import bs_pkg::*;
  logic [DIM-1:0][QW-1:0] q;
  logic [DIM-1:0]         kplane;
  logic [RW-1:0]          r;
  logic                   hit;
  logic signed [SCORE_W-1:0] psum, delta, score;
  int checks = 0, failures = 0;

  brat dut (.*);

  initial begin
    #100000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 600; t++) begin
      longint s, w, exp_d, exp_s;
      for (int d = 0; d < DIM; d++) q[d] = (t < 20) ? 12'h800 : 12'($urandom);
      kplane = (t < 40) ? '1 : {$urandom, $urandom};
      r      = RW'($urandom % NPLANES);
      hit    = $urandom % 2;
      psum   = $signed($urandom) >>> 4;
      #1;
      s = 0;
      for (int d = 0; d < DIM; d++) if (kplane[d]) s += longint'($signed(q[d]));
      w = (r == 0) ? -(64'sd1 <<< 11) : (64'sd1 <<< (11 - r));
      exp_d = s * w;
      exp_s = (hit ? longint'(psum) : 0) + exp_d;
      checks++;
      if (longint'(delta) != exp_d || longint'(score) != exp_s) begin
        failures++;
        $display("FAIL r=%0d hit=%0d delta %0d exp %0d score %0d exp %0d", r, hit, delta, exp_d, score, exp_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
