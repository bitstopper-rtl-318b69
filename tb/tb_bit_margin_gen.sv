// tb_bit_margin_gen: for random Queries, checks the margin LUT two ways:
// against sum(q>0)*(2^(11-r)-1) and sum(q<0)*(2^(11-r)-1), and by bounding:
// for random Keys the exact score must lie inside [A^r + M^{r,min},
// A^r + M^{r,max}], and the Keys built to reach the bounds must hit them
// exactly. Also checks that 'done' comes two cycles after 'start'.
module tb_bit_margin_gen;
  import bs_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  always #1 clk = ~clk;
  logic [DIM-1:0][QW-1:0] q;
  logic signed [SCORE_W-1:0] m_min [NPLANES];
  logic signed [SCORE_W-1:0] m_max [NPLANES];
  int checks = 0, failures = 0;

  bit_margin_gen dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int qv [DIM];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int lat;
      longint pos, neg;
      pos = 0; neg = 0;
      for (int d = 0; d < DIM; d++) begin
        qv[d] = (t == 0) ? 2047 : (t == 1) ? -2048 : int'($urandom % 4096) - 2048;
        q[d]  = 12'(qv[d]);
        if (qv[d] > 0) pos += qv[d]; else neg += qv[d];
      end
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      chk(lat == 2, $sformatf("latency %0d", lat));
      for (int r = 0; r < NPLANES; r++) begin
        longint u;
        u = (64'sd1 <<< (11 - r)) - 1;
        chk(longint'(m_max[r]) == pos * u && longint'(m_min[r]) == neg * u,
            $sformatf("r=%0d max %0d min %0d", r, m_max[r], m_min[r]));
      end
      // bounds against random and extreme Keys
      for (int kk = 0; kk < 6; kk++) begin
        int kv [DIM];
        for (int r = 0; r < NPLANES; r++) begin
          longint a, ex, lo, hi;
          a = 0; ex = 0;
          for (int d = 0; d < DIM; d++) begin
            logic [11:0] b;
            int v;
            v = int'($urandom % 4096) - 2048;
            b = 12'(v);
            // kk 4 / 5: unknown bits set to reach the upper / lower bound
            if (kk >= 4)
              for (int rr = r + 1; rr < NPLANES; rr++)
                b[11 - rr] = (kk == 4) ? (qv[d] > 0) : (qv[d] < 0);
            kv[d] = $signed(b);
            ex += longint'(qv[d]) * longint'(kv[d]);
            for (int rr = 0; rr <= r; rr++)
              if (b[11 - rr]) a += longint'(qv[d]) * ((rr == 0) ? -2048 : (64'sd1 <<< (11 - rr)));
          end
          lo = a + longint'(m_min[r]);
          hi = a + longint'(m_max[r]);
          chk(lo <= ex && ex <= hi, $sformatf("bound r=%0d", r));
          if (kk == 4) chk(ex == hi, "upper bound reached");
          if (kk == 5) chk(ex == lo, "lower bound reached");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
