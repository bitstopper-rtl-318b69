// tb_scheduler: a small scheduler (4 lanes, window 3, 256 Keys max) with
// lanes that retire tokens after random delays. Checks the phase sequence
// (Q read and clear on start, margin start, QK, qk_done, done after
// vpu_done), that every Key below seq_len is issued exactly once on lane
// j mod 4 in increasing order, that a lane never has more than 3 tokens in
// flight, that the window stall happens, and that qk_done waits for the last
// retirement.
module tb_scheduler;
  import bs_pkg::*;
  localparam int NL = 4, TOKW = 8, WIN = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, busy, done, q_rd_en, bmg_start, bmg_done = 0, clear, qk_active, qk_done;
  logic vpu_done = 0;
  logic [TOKW:0] seq_len = 0;
  logic [NL-1:0] new_valid, new_ready = 0, retire = 0, win_stall;
  logic [TOKW-1:0] new_tok [NL];
  int checks = 0, failures = 0;

  scheduler #(.NL(NL), .TOKW(TOKW), .WINDOW(WIN)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  int issued [256];
  int inflight [NL][$];
  int last_tok [NL];
  int n_stall;
  bit phase_qk;

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // lanes: accept issues, retire later; sampled before the clock edge
  always @(negedge clk) begin
    #0.5;
    if (rst_n) begin
      for (int l = 0; l < NL; l++) begin
        if (retire[l]) void'(inflight[l].pop_front());
        if (new_valid[l] && new_ready[l]) begin
          int t;
          t = int'(new_tok[l]);
          chk(t % NL == l && t > last_tok[l] && t < int'(seq_len), $sformatf("lane %0d issued %0d", l, t));
          issued[t]++;
          last_tok[l] = t;
          inflight[l].push_back(t);
          chk(inflight[l].size() <= WIN, "window exceeded");
        end
        if (win_stall[l]) n_stall++;
      end
    end
  end

  always @(negedge clk) begin
    for (int l = 0; l < NL; l++) begin
      new_ready[l] = ($urandom % 4) != 0;
      retire[l]    = (inflight[l].size() > 0) && (($urandom % 6) == 0);
    end
  end

  task automatic run(input int n);
    int guard;
    for (int j = 0; j < 256; j++) issued[j] = 0;
    for (int l = 0; l < NL; l++) last_tok[l] = -1;
    seq_len = (TOKW+1)'(n);
    start = 1;
    #0.5;
    chk(q_rd_en && clear, "Q read and clear on start");
    @(negedge clk);
    start = 0;
    guard = 0;
    while (!bmg_start && guard < 10) begin @(negedge clk); guard++; end
    chk(bmg_start, "margin generator started");
    @(negedge clk);
    chk(!qk_active, "QK waits for the margins");
    bmg_done = 1; @(negedge clk); bmg_done = 0;
    guard = 0;
    while (!qk_done && guard < 5000) begin
      @(negedge clk);
      guard++;
    end
    for (int j = 0; j < 256; j++) chk(issued[j] == ((j < n) ? 1 : 0), $sformatf("token %0d issued %0d times", j, issued[j]));
    for (int l = 0; l < NL; l++) chk(inflight[l].size() == 0, "qk_done with tokens in flight");
    repeat (3) @(negedge clk);
    chk(busy && !done, "waits for the V-PU");
    vpu_done = 1; @(negedge clk); vpu_done = 0;
    #0.5;
    chk(done, "done after vpu_done");
    @(negedge clk);
    chk(!busy, "idle after done");
  endtask

  initial begin
    n_stall = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(37);
    run(256);
    run(1);
    chk(n_stall > 0, "window stall never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
