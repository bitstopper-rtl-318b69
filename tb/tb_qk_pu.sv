// tb_qk_pu: QK-PU with 4 lanes on 120 Keys. The testbench loads Q_i, starts
// the margin generator, writes all sign planes into the K buffer and answers
// every next-plane request with the requested plane after a random delay.
// Checks the margin-generator handshake, that every final score equals the
// exact dot product, that no Key within alpha*radius of the best score is
// lost, that the LATS maximum equals the best score, and that Keys were cut
// off early.
module tb_qk_pu;
  import bs_pkg::*;
  localparam int NL = 4, TOKW = 8, NT = 120;
  logic clk = 0, rst_n = 0, clear = 0;
  always #1 clk = ~clk;
  logic q_wr_en = 0, q_rd_en = 0, bmg_start = 0, bmg_done;
  logic [6:0] q_wr_addr = 0, q_rd_addr = 0;
  logic [DIM-1:0][QW-1:0] q_wr_data = '0;
  logic [ALPHA_W-1:0] alpha;
  logic [RAD_W-1:0] radius;
  logic [NL-1:0] kbuf_wr, req_valid, req_ready, fin_valid, fin_ready, retire, pruned, lane_busy;
  logic [DIM-1:0] kbuf_plane [NL];
  logic [TOKW-1:0] kbuf_tok [NL], req_tok [NL], fin_tok [NL];
  logic [RW-1:0] kbuf_r [NL], req_r [NL];
  logic signed [SCORE_W-1:0] fin_score [NL];
  logic signed [THR_W-1:0] max_lb, eta;
  int checks = 0, failures = 0;

  qk_pu #(.NL(NL), .TOKW(TOKW)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  int qv [DIM];
  int kv [NT][DIM];
  longint exact [NT];
  bit kept [NT];
  int n_retired, n_planes;
  typedef struct { int t; int r; int due; } pend_t;
  pend_t pq [NL][$];
  int cyc = 0;

  function automatic logic [DIM-1:0] plane_of(int t, int r);
    logic [DIM-1:0] w;
    for (int d = 0; d < DIM; d++) begin
      logic [11:0] b;
      b = 12'(kv[t][d]);
      w[d] = b[11 - r];
    end
    return w;
  endfunction

  // memory: sampled before the edge, planes written on the following cycles
  always @(negedge clk) begin
    #0.5;
    cyc++;
    if (rst_n) begin
      for (int l = 0; l < NL; l++) begin
        if (req_valid[l] && req_ready[l]) pq[l].push_back('{int'(req_tok[l]), int'(req_r[l]), cyc + 3 + int'($urandom % 10)});
        if (fin_valid[l] && fin_ready[l]) begin
          kept[fin_tok[l]] = 1;
          chk(longint'(fin_score[l]) == exact[fin_tok[l]], $sformatf("final score of %0d", fin_tok[l]));
        end
        if (retire[l]) n_retired++;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    longint mx, off;
    int lat;
    kbuf_wr = '0; req_ready = '1; fin_ready = '1;
    for (int l = 0; l < NL; l++) begin kbuf_plane[l] = 0; kbuf_tok[l] = 0; kbuf_r[l] = 0; end
    alpha = 9'd154; radius = 32'd8000000;
    for (int d = 0; d < DIM; d++) qv[d] = int'($urandom % 2048) - 1024;
    for (int t = 0; t < NT; t++) begin
      bit hot;
      hot = (t % 17) == 5;
      exact[t] = 0;
      kept[t] = 0;
      for (int d = 0; d < DIM; d++) begin
        kv[t][d] = hot ? qv[d] : int'($urandom % 2048) - 1024;
        exact[t] += longint'(qv[d]) * longint'(kv[t][d]);
      end
    end
    n_retired = 0; n_planes = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    q_wr_en = 1; q_wr_addr = 7'd3;
    for (int d = 0; d < DIM; d++) q_wr_data[d] = 12'(qv[d]);
    @(negedge clk);
    q_wr_en = 0;
    clear = 1; q_rd_en = 1; q_rd_addr = 7'd3;
    @(negedge clk);
    clear = 0; q_rd_en = 0; bmg_start = 1;
    @(negedge clk);
    bmg_start = 0;
    lat = 1;
    while (!bmg_done) begin @(negedge clk); lat++; end
    chk(lat == 2, "margin LUT ready two cycles after start");
    // sign planes of every Key, then requested planes when due
    for (int t = 0; t < NT; t++) pq[t % NL].push_back('{t, 0, 0});
    while (n_retired < NT && cyc < 20000) begin
      for (int l = 0; l < NL; l++) begin
        kbuf_wr[l] = 0;
        for (int i = 0; i < pq[l].size(); i++)
          if (pq[l][i].due <= cyc) begin
            kbuf_wr[l] = 1;
            kbuf_tok[l] = 8'(pq[l][i].t);
            kbuf_r[l] = RW'(pq[l][i].r);
            kbuf_plane[l] = plane_of(pq[l][i].t, pq[l][i].r);
            pq[l].delete(i);
            n_planes++;
            break;
          end
      end
      @(negedge clk);
    end
    kbuf_wr = '0;
    repeat (5) @(negedge clk);
    mx = exact[0];
    for (int t = 1; t < NT; t++) if (exact[t] > mx) mx = exact[t];
    off = (longint'(alpha) * longint'(radius)) >>> 8;
    chk(n_retired == NT, "all Keys retired");
    chk(longint'(max_lb) == mx, $sformatf("LATS max %0d vs %0d", max_lb, mx));
    for (int t = 0; t < NT; t++) if (exact[t] > mx - off) chk(kept[t], $sformatf("Key %0d lost", t));
    chk(n_planes < NT * NPLANES, "no early termination");
    $display("planes read %0d of %0d", n_planes, NT * NPLANES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
