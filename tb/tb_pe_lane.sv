// tb_pe_lane: one lane (lane 0, tokens 0, 32, 64, ...) fed with Key planes
// in random token order, each token's planes in sequence, as returned by a
// memory with random delays. The testbench computes every partial score,
// the keep/prune decision A^r + M^{r,max} > eta, the expected plane requests
// and final scores itself, and checks the lane against them: requested
// planes, pruning round of every token, final score values, LATS reports and
// one plane per cycle when the outputs are always ready.
module tb_pe_lane;
  import bs_pkg::*;
  localparam int NT = 60;
  logic clk = 0, rst_n = 0, clear = 0;
  always #1 clk = ~clk;

  logic [DIM-1:0][QW-1:0] q;
  logic signed [SCORE_W-1:0] margin_max [NPLANES];
  logic signed [THR_W-1:0] eta;
  logic in_valid, in_ready, sc_valid, req_valid, req_ready, fin_valid, fin_ready;
  logic retire, pruned, sb_full;
  logic [DIM-1:0] in_plane;
  logic [11:0] in_tok, req_tok, fin_tok;
  logic [RW-1:0] in_r, sc_r, req_r;
  logic signed [SCORE_W-1:0] sc_score, fin_score;

  pe_lane dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  int kv [NT][DIM];
  int qv [DIM];
  longint part [NT][NPLANES];   // A^r
  int exp_last [NT];            // last plane read (pruned or final)
  bit exp_fin  [NT];
  int got_last [NT];
  bit got_fin  [NT];
  int n_retire, bubbles;
  bit always_ready;

  typedef struct { int t; int r; } item_t;
  item_t pend[$];

  function automatic logic [DIM-1:0] plane_of(int t, int r);
    logic [DIM-1:0] w;
    for (int d = 0; d < DIM; d++) begin
      logic [11:0] b;
      b = 12'(kv[t][d]);
      w[d] = b[11 - r];
    end
    return w;
  endfunction

  task automatic setup(input longint eta_v);
    longint pos = 0;
    for (int d = 0; d < DIM; d++) begin
      qv[d] = int'($urandom % 4096) - 2048;
      q[d]  = 12'(qv[d]);
      if (qv[d] > 0) pos += qv[d];
    end
    for (int r = 0; r < NPLANES; r++) margin_max[r] = SCORE_W'(pos * ((64'sd1 <<< (11 - r)) - 1));
    eta = THR_W'(eta_v);
    for (int t = 0; t < NT; t++) begin
      for (int d = 0; d < DIM; d++) kv[t][d] = int'($urandom % 4096) - 2048;
      for (int r = 0; r < NPLANES; r++) begin
        longint s = 0;
        for (int d = 0; d < DIM; d++) begin
          logic [11:0] b;
          b = 12'(kv[t][d]);
          for (int rr = 0; rr <= r; rr++)
            if (b[11 - rr]) s += longint'(qv[d]) * ((rr == 0) ? -2048 : (64'sd1 <<< (11 - rr)));
        end
        part[t][r] = s;
      end
      exp_last[t] = NPLANES - 1; exp_fin[t] = 1;
      for (int r = 0; r < NPLANES; r++)
        if (!(part[t][r] + longint'(margin_max[r]) > eta_v)) begin
          exp_last[t] = r; exp_fin[t] = 0; break;
        end
      got_last[t] = -1; got_fin[t] = 0;
      pend.push_back('{t, 0});
    end
  endtask

  // memory side and monitors
  item_t cur;
  bit    took = 0;
  // sampled half a cycle after the inputs change, before the clock edge
  always @(negedge clk) begin
    #0.5;
    took = in_valid && in_ready;
    if (rst_n && req_valid && req_ready) begin
      int t;
      t = int'(req_tok) / 32;
      chk(req_r == sc_r + 1 && sc_valid, "request order");
      chk(int'(req_r) <= exp_last[t], $sformatf("token %0d plane %0d requested, last %0d", t, req_r, exp_last[t]));
      pend.push_back('{t, int'(req_r)});
    end
    if (rst_n && sc_valid) begin
      int t;
      t = int'(dut.s1_tok) / 32;
      chk(longint'(sc_score) == part[t][sc_r], $sformatf("partial score t=%0d r=%0d", t, sc_r));
      got_last[t] = int'(sc_r);
    end
    if (rst_n && fin_valid && fin_ready) begin
      int t;
      t = int'(fin_tok) / 32;
      got_fin[t] = 1;
      chk(longint'(fin_score) == part[t][NPLANES-1], "final score");
    end
    if (rst_n && retire) n_retire++;
    if (rst_n && always_ready && !clear && in_valid && !in_ready) bubbles++;
  end

  always @(negedge clk) begin
    if (in_valid && !took) begin
      // hold the offered plane until the lane takes it
    end else if (pend.size() > 0 && ($urandom % 4 != 0 || always_ready)) begin
      int k;
      k = int'($urandom % pend.size());
      cur = pend[k];
      pend.delete(k);
      in_valid = 1; in_tok = 12'(cur.t * 32); in_r = RW'(cur.r); in_plane = plane_of(cur.t, cur.r);
    end else in_valid = 0;
    req_ready = always_ready || ($urandom % 5 != 0);
    fin_ready = always_ready || ($urandom % 3 != 0);
  end

  task automatic run(input longint eta_v, input bit ar);
    always_ready = ar;
    n_retire = 0;
    setup(eta_v);
    clear = 1; @(negedge clk); clear = 0;
    while (n_retire < NT) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      chk(got_last[t] == exp_last[t], $sformatf("token %0d stopped after %0d, expected %0d", t, got_last[t], exp_last[t]));
      chk(got_fin[t] == exp_fin[t], $sformatf("token %0d final %0d", t, got_fin[t]));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    in_valid = 0; in_tok = 0; in_r = 0; in_plane = 0; req_ready = 1; fin_ready = 1;
    eta = 0; always_ready = 0; bubbles = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 0);                 // about half the tokens survive
    run(64'sd30000000, 0);     // prunes at many rounds
    run(-64'sd400000000, 1);   // keeps everything, full throughput
    chk(bubbles == 0, $sformatf("%0d bubbles with outputs always ready", bubbles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
