// tb_bitstopper_top: end-to-end test of the accelerator at its default size.
//
// Generates Query, Key and Value data, places the Keys in the behavioural DRAM
// in bit-plane-major order (plane r of Key j at k_base + r*seq_len + j), runs
// several queries (1000 to 4096 Keys, several alpha values) and checks:
//  * every final score equals the exact dot product Q_i . K_j;
//  * no token whose exact score is within alpha*radius of the maximum was
//    pruned, and the LATS maximum equals the largest exact score;
//  * the output vector equals a reference computed here from the surviving
//    tokens with the same fixed-point softmax (base-2 table, 12-bit weights,
//    2^32/sum reciprocal, rounding, saturation);
//  * the QK phase uses at least (bit planes read) / 32 cycles, one 64-bit
//    plane per lane per cycle;
//  * every mechanism happened: tokens pruned before the last plane,
//    tokens reaching the last plane, out-of-order plane replies, lanes
//    waiting on memory, window stalls, final-score collection stalls and
//    Value fetches overlapping the QK phase.
module tb_bitstopper_top;
  import bs_pkg::*;
  localparam int NL   = LANES;
  localparam int TOKW = $clog2(MAX_SEQ);
  localparam int TAGW = TOKW + RW;
  localparam int KWORDS = NPLANES * MAX_SEQ;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic                  q_wr_en, start, busy, done, out_valid, out_ready;
  logic [6:0]            q_wr_addr, q_idx;
  logic [DIM-1:0][QW-1:0] q_wr_data, out_vec;
  logic [TOKW:0]         seq_len;
  logic [ADDR_W-1:0]     k_base, v_base;
  logic [ALPHA_W-1:0]    alpha;
  logic [RAD_W-1:0]      radius;
  logic [SMS_W-1:0]      sm_scale;
  logic [NL-1:0]         kreq_valid, kreq_ready, krsp_valid;
  logic [ADDR_W-1:0]     kreq_addr [NL];
  logic [TAGW-1:0]       kreq_tag [NL], krsp_tag [NL];
  logic [DIM-1:0]        krsp_data [NL];
  logic                  vreq_valid, vreq_ready, vrsp_valid;
  logic [ADDR_W-1:0]     vreq_addr;
  logic [DIM*QW-1:0]     vrsp_data;
  logic [NL-1:0]         ev_pruned, ev_final, ev_win_stall, ev_lane_wait;
  logic                  ev_collect_stall;

  bitstopper_top dut (.*);

  dram_model #(.NL(NL), .DIM_P(DIM), .QW_P(QW), .TAGW(TAGW), .KWORDS(KWORDS),
               .VWORDS(MAX_SEQ), .SLOTS(SB_DEPTH + 8), .LAT_MIN(40), .LAT_JIT(60)) mem (
    .clk, .rst_n, .kreq_valid, .kreq_ready, .kreq_addr, .kreq_tag, .krsp_valid, .krsp_data,
    .krsp_tag, .vreq_valid, .vreq_ready, .vreq_addr, .vrsp_valid, .vrsp_data);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- data ----------------
  int qv [DIM];
  int kv [MAX_SEQ][DIM];
  int vv [MAX_SEQ][DIM];
  longint exact [MAX_SEQ];
  bit     kept  [MAX_SEQ];
  longint got   [MAX_SEQ];

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % unsigned'(hi - lo + 1));
  endfunction

  task automatic make_data(input int n, input int hot_pct);
    for (int d = 0; d < DIM; d++) qv[d] = rnd(-1024, 1023);
    for (int j = 0; j < n; j++) begin
      bit hot;
      hot = (rnd(0, 99) < hot_pct);
      for (int d = 0; d < DIM; d++) begin
        int x;
        x = hot ? qv[d] + rnd(-300, 300) : rnd(-1024, 1023);
        if (x > 2047) x = 2047;
        if (x < -2048) x = -2048;
        kv[j][d] = x;
        vv[j][d] = rnd(-2048, 2047);
      end
    end
    for (int j = 0; j < n; j++) begin
      exact[j] = 0;
      for (int d = 0; d < DIM; d++) exact[j] += longint'(qv[d]) * longint'(kv[j][d]);
    end
    // bit-plane-major Key image, plane 0 = sign bit
    for (int r = 0; r < NPLANES; r++)
      for (int j = 0; j < n; j++) begin
        logic [DIM-1:0] w;
        for (int d = 0; d < DIM; d++) begin
          logic [11:0] b;
          b = 12'(kv[j][d]);
          w[d] = b[NPLANES - 1 - r];
        end
        mem.kmem[r * n + j] = w;
      end
    for (int j = 0; j < n; j++) begin
      logic [DIM*QW-1:0] w;
      for (int d = 0; d < DIM; d++) w[d*QW +: QW] = 12'(vv[j][d]);
      mem.vmem[j] = w;
    end
  endtask

  // ---------------- monitors ----------------
  int  planes_req [NPLANES];
  int  n_ooo_start, n_win_stall, n_lane_wait, n_collect_stall, n_v_overlap, n_final, n_pruned;
  int  n_kreq, qk_cycles;
  bit  in_qk;
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NL; l++) begin
      if (kreq_valid[l] && kreq_ready[l]) begin
        planes_req[kreq_tag[l][RW-1:0]]++;
        n_kreq++;
      end
      if (ev_win_stall[l]) n_win_stall++;
      if (ev_pruned[l]) n_pruned++;
      if (ev_lane_wait[l] && dut.u_sched.infl[l] != 0) n_lane_wait++;
      if (dut.fin_valid[l] && dut.fin_ready[l]) begin
        kept[dut.fin_tok[l]] = 1;
        got[dut.fin_tok[l]]  = longint'(dut.fin_score[l]);
        n_final++;
      end
    end
    if (ev_collect_stall) n_collect_stall++;
    if (vreq_valid && vreq_ready && dut.qk_active) n_v_overlap++;
    if (dut.qk_active) qk_cycles++;
  end

  // ---------------- reference output ----------------
  function automatic int lut_ref(input int f);
    return int'($floor((2.0 ** (-real'(f) / 64.0)) * 131072.0 + 0.5));
  endfunction

  task automatic run_query(input int n, input int hot_pct, input int a_q8, input int seed_q);
    longint mx, off, wsum, recip;
    longint acc [DIM];
    int     cyc, rad;
    real    s;
    int     pruned_rounds;
    make_data(n, hot_pct);
    for (int j = 0; j < MAX_SEQ; j++) kept[j] = 0;
    for (int r = 0; r < NPLANES; r++) planes_req[r] = 0;
    n_kreq = 0; qk_cycles = 0;
    // scale: one real score unit = 1 / (1.9e6) integer units
    s   = 1.0 / 1.9e6;
    rad = int'(5.0 / s);
    @(negedge clk);
    q_wr_en = 1'b1; q_wr_addr = 7'(seed_q);
    for (int d = 0; d < DIM; d++) q_wr_data[d] = 12'(qv[d]);
    @(negedge clk);
    q_wr_en = 1'b0;
    q_idx = 7'(seed_q); seq_len = (TOKW+1)'(n); k_base = 0; v_base = 0;
    alpha = ALPHA_W'(a_q8); radius = RAD_W'(rad);
    sm_scale = SMS_W'(int'(s * 1.4426950408889634 * 1024.0 * 16777216.0));
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    // exactness of surviving scores, no false pruning
    mx = exact[0];
    for (int j = 1; j < n; j++) if (exact[j] > mx) mx = exact[j];
    off = (longint'(a_q8) * longint'(rad)) >>> 8;
    check(longint'(dut.max_lb) == mx, $sformatf("n=%0d LATS max %0d vs %0d", n, dut.max_lb, mx));
    for (int j = 0; j < n; j++) begin
      if (kept[j]) check(got[j] == exact[j], $sformatf("score of token %0d: %0d vs %0d", j, got[j], exact[j]));
      if (exact[j] > mx - off) check(kept[j], $sformatf("token %0d (score %0d, max %0d) lost", j, exact[j], mx));
    end
    // reference output over surviving tokens
    wsum = 0;
    for (int d = 0; d < DIM; d++) acc[d] = 0;
    for (int j = 0; j < n; j++) if (kept[j]) begin
      longint dd, x, p, w;
      dd = mx - exact[j];
      x  = (dd * longint'(sm_scale)) >>> 24;
      if (x > 262143) x = 262143;
      p  = ((x >>> 10) >= 18) ? 0 : (longint'(lut_ref(int'((x >>> 4) & 63))) >>> (x >>> 10));
      w  = p >>> 6;
      wsum += w;
      for (int d = 0; d < DIM; d++) acc[d] += w * longint'(vv[j][d]);
    end
    recip = (wsum == 0) ? 0 : ((64'd1 << 32) / wsum);
    while (!out_valid) @(negedge clk);
    for (int d = 0; d < DIM; d++) begin
      longint o;
      o = (acc[d] * recip + (64'sd1 <<< 31)) >>> 32;
      if (o > 2047) o = 2047;
      if (o < -2048) o = -2048;
      check($signed(out_vec[d]) == 12'(o), $sformatf("out[%0d] %0d vs %0d", d, $signed(out_vec[d]), o));
    end
    out_ready = 1'b1;
    @(negedge clk);
    out_ready = 1'b0;
    // one plane per lane per cycle
    check(qk_cycles >= n_kreq / NL, $sformatf("QK phase %0d cycles for %0d planes", qk_cycles, n_kreq));
    pruned_rounds = 0;
    for (int r = 0; r < NPLANES - 1; r++) if (planes_req[r] > planes_req[r+1]) pruned_rounds++;
    $display("query n=%0d alpha=%0d/256: %0d cycles (QK %0d), planes %0d of %0d (%0.1f%%), kept %0d, pruned in %0d rounds, per plane %p",
             n, a_q8, cyc, qk_cycles, n_kreq, n * NPLANES, 100.0 * n_kreq / (n * NPLANES),
             planes_req[NPLANES-1], pruned_rounds, planes_req);
  endtask

  initial begin
    q_wr_en = 0; start = 0; out_ready = 0; q_wr_addr = 0; q_wr_data = '0; q_idx = 0;
    seq_len = 0; k_base = 0; v_base = 0; alpha = 0; radius = 0; sm_scale = 0;
    n_win_stall = 0; n_lane_wait = 0; n_collect_stall = 0; n_v_overlap = 0; n_final = 0; n_pruned = 0;
    n_kreq = 0; qk_cycles = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_query(1024, 3, 154, 0);   // alpha = 0.6
    run_query(2048, 3, 154, 1);
    run_query(4096, 3, 154, 2);
    run_query(1000, 10, 256, 3);  // alpha = 1.0, ragged length
    run_query(2048, 2, 51, 4);    // alpha = 0.2
    check(planes_req[0] > 0, "no Key issued");
    check(mem.ooo_count > 0, "no out-of-order plane reply");
    check(n_lane_wait > 0, "no lane ever waited on memory");
    check(n_win_stall > 0, "window never stalled issue");
    check(n_collect_stall > 0, "final-score collection never stalled");
    check(n_v_overlap > 0, "no Value fetch overlapped the QK phase");
    check(n_final > 0, "no token reached the last plane");
    check(n_pruned > 0, "no token was pruned");
    $display("events: pruned=%0d ooo=%0d lane_wait=%0d win_stall=%0d collect_stall=%0d v_overlap=%0d finals=%0d",
             n_pruned, mem.ooo_count, n_lane_wait, n_win_stall, n_collect_stall, n_v_overlap, n_final);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
