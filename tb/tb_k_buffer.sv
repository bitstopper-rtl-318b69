// tb_k_buffer: random pushes and pops on every bank (default 32 x 1024
// planes) against per-bank queues; checks head data, tags, order, valid and
// that each bank fills up exactly at its depth.
module tb_k_buffer;
  import bs_pkg::*;
  localparam int NL = LANES, D = (KBUF_BYTES * 8) / (LANES * DIM);
  logic clk = 0, rst_n = 0, clear = 0;
  always #1 clk = ~clk;
  logic [NL-1:0] wr_valid, rd_valid, rd_ready, bank_full;
  logic [DIM-1:0] wr_plane [NL], rd_plane [NL];
  logic [11:0] wr_tok [NL], rd_tok [NL];
  logic [RW-1:0] wr_r [NL], rd_r [NL];
  int checks = 0, failures = 0;

  k_buffer dut (.*);

  typedef logic [DIM+12+RW-1:0] ent_t;
  ent_t qm [NL][$];

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic step(input int push_pct, input int pop_pct);
    for (int l = 0; l < NL; l++) begin
      checks++;
      if (rd_valid[l] != (qm[l].size() > 0) || bank_full[l] != (qm[l].size() == D) ||
          (qm[l].size() > 0 && {rd_plane[l], rd_tok[l], rd_r[l]} != qm[l][0])) begin
        failures++;
        if (failures < 10) $display("FAIL bank %0d", l);
      end
      rd_ready[l] = ($urandom % 100) < pop_pct;
      wr_valid[l] = (($urandom % 100) < push_pct) && (qm[l].size() < D);
      wr_plane[l] = {$urandom, $urandom};
      wr_tok[l]   = 12'($urandom);
      wr_r[l]     = RW'($urandom);
    end
    @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      if (rd_ready[l] && qm[l].size() > 0) void'(qm[l].pop_front());
      if (wr_valid[l]) qm[l].push_back({wr_plane[l], wr_tok[l], wr_r[l]});
    end
  endtask

  initial begin
    wr_valid = '0; rd_ready = '0;
    for (int l = 0; l < NL; l++) begin wr_plane[l] = 0; wr_tok[l] = 0; wr_r[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) step(60, 50);
    for (int t = 0; t < D + 10; t++) step(100, 0);   // fill every bank
    for (int t = 0; t < 300; t++) step(50, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
