// tb_vpu: a small V-PU (4 lanes, 256 tokens, V buffer of 4) fed with final
// scores from several lanes at once, Value vectors returned by a memory with
// a fixed delay, and qk_done raised after the last score. The output vector is
// checked against a reference computed here with real-number-free integer
// arithmetic: x = (m - a) * sm_scale >> 24, p = table(x) >> int(x),
// w = p >> 6, O = round(sum(w V) * floor(2^32 / sum(w)) / 2^32), saturated.
// Also checks that collection stalls happen and that the result waits for
// qk_done.
module tb_vpu;
  import bs_pkg::*;
  localparam int NL = 4, TOKW = 8, SFD = 256, VD = 4, NT = 200;
  logic clk = 0, rst_n = 0, clear = 0, qk_done = 0;
  always #1 clk = ~clk;
  logic signed [THR_W-1:0] max_score;
  logic [SMS_W-1:0] sm_scale;
  logic [NL-1:0] fin_valid, fin_ready;
  logic [TOKW-1:0] fin_tok [NL];
  logic signed [SCORE_W-1:0] fin_score [NL];
  logic vidx_valid, vidx_pop, vbuf_wr, out_valid, out_ready, vpu_done, collect_stall;
  logic [TOKW-1:0] vidx_tok;
  logic [DIM*QW-1:0] vbuf_data;
  logic [$clog2(VD+1)-1:0] vbuf_count;
  logic [DIM-1:0][QW-1:0] out_vec;
  int checks = 0, failures = 0;

  vpu #(.NL(NL), .TOKW(TOKW), .SFD(SFD), .VDEPTH(VD)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  int     vv [NT][DIM];
  longint sc [NT];
  int     n_stall;
  int     v_out;
  int     vq[$];
  int     vdelay[$];

  function automatic int lut_ref(input int f);
    return int'($floor((2.0 ** (-real'(f) / 64.0)) * 131072.0 + 0.5));
  endfunction

  // memory: pop indices while the V buffer has room, answer 5 cycles later
  always @(negedge clk) begin
    #0.5;
    if (rst_n) begin
      if (vidx_valid && vidx_pop) begin vq.push_back(int'(vidx_tok)); vdelay.push_back(5); v_out++; end
      if (collect_stall) n_stall++;
    end
  end
  always @(negedge clk) begin
    vbuf_wr = 0;
    for (int i = 0; i < vdelay.size(); i++) vdelay[i]--;
    if (vdelay.size() > 0 && vdelay[0] <= 0) begin
      int t;
      t = vq.pop_front();
      void'(vdelay.pop_front());
      for (int d = 0; d < DIM; d++) vbuf_data[d*QW +: QW] = 12'(vv[t][d]);
      vbuf_wr = 1;
      v_out--;
    end
    vidx_pop = vidx_valid && (v_out + int'(vbuf_count) + (vbuf_wr ? 1 : 0) < VD);
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    longint mx, wsum, recip;
    longint acc [DIM];
    int sent, guard;
    bit pending [NT];
    fin_valid = 0; out_ready = 0; vidx_pop = 0; vbuf_wr = 0; vbuf_data = 0; v_out = 0; n_stall = 0;
    for (int l = 0; l < NL; l++) begin fin_tok[l] = 0; fin_score[l] = 0; end
    sm_scale = 16'd20000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      int n;
      n = (round == 0) ? NT : (round == 1) ? 17 : 1;
      mx = 0;
      for (int t = 0; t < n; t++) begin
        sc[t] = longint'($urandom % 20000000) - 10000000;
        if (t == 0 || sc[t] > mx) mx = sc[t];
        for (int d = 0; d < DIM; d++) vv[t][d] = int'($urandom % 4096) - 2048;
        pending[t] = 1;
      end
      max_score = THR_W'(mx);
      clear = 1; @(negedge clk); clear = 0;
      // deliver scores: token t from lane t % NL, several lanes at once
      sent = 0;
      for (int t = 0; t < n; t++) pending[t] = 1;
      while (sent < n) begin
        bit acc_l [NL];
        for (int l = 0; l < NL; l++) begin
          int t;
          if (!fin_valid[l]) begin
            t = -1;
            for (int k = l; k < n; k += NL) if (pending[k]) begin t = k; break; end
            if (t >= 0 && ($urandom % 3 != 0)) begin
              pending[t] = 0;
              fin_valid[l] = 1; fin_tok[l] = 8'(t); fin_score[l] = SCORE_W'(sc[t]);
            end
          end
        end
        #0.5;
        for (int l = 0; l < NL; l++) begin
          acc_l[l] = fin_valid[l] && fin_ready[l];
          if (acc_l[l]) sent++;
        end
        @(negedge clk);
        for (int l = 0; l < NL; l++) if (acc_l[l]) fin_valid[l] = 0;
      end
      fin_valid = 0;
      repeat (20) @(negedge clk);
      chk(!out_valid && !vpu_done, "output before qk_done");
      qk_done = 1;
      guard = 0;
      while (!out_valid && guard < 5000) begin @(negedge clk); guard++; end
      // reference
      wsum = 0;
      for (int d = 0; d < DIM; d++) acc[d] = 0;
      for (int t = 0; t < n; t++) begin
        longint dd, x, p, w;
        dd = mx - sc[t];
        x  = (dd * longint'(sm_scale)) >>> 24;
        if (x > 262143) x = 262143;
        p  = ((x >>> 10) >= 18) ? 0 : (longint'(lut_ref(int'((x >>> 4) & 63))) >>> (x >>> 10));
        w  = p >>> 6;
        wsum += w;
        for (int d = 0; d < DIM; d++) acc[d] += w * longint'(vv[t][d]);
      end
      recip = (wsum == 0) ? 0 : ((64'd1 << 32) / wsum);
      for (int d = 0; d < DIM; d++) begin
        longint o;
        o = (acc[d] * recip + (64'sd1 <<< 31)) >>> 32;
        if (o > 2047) o = 2047;
        if (o < -2048) o = -2048;
        chk($signed(out_vec[d]) == 12'(o), $sformatf("round %0d out[%0d] %0d vs %0d", round, d, $signed(out_vec[d]), o));
      end
      out_ready = 1; @(negedge clk); out_ready = 0;
      qk_done = 0;
      @(negedge clk);
    end
    chk(n_stall > 0, "collection never stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
