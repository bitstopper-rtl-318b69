// tb_scoreboard: random lookups, updates and evictions against an associative
// array model; checks hit, stored score and bit index, occupancy and full.
module tb_scoreboard;
  import bs_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, clear = 0;
  always #1 clk = ~clk;
  logic [SB_TOK_W-1:0] lk_tag, upd_tag;
  logic lk_hit, upd_valid = 0, upd_keep, full;
  logic [RW-1:0] lk_bit, upd_bit;
  logic signed [SCORE_W-1:0] lk_score, upd_score;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;

  scoreboard #(.DEPTH(D)) dut (.*);

  longint mscore [int];
  int     mbit   [int];

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    upd_tag = 0; upd_bit = 0; upd_score = 0; upd_keep = 0; lk_tag = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int tag;
      tag = $urandom % 16;
      lk_tag = SB_TOK_W'(tag);
      #0.5;
      chk(lk_hit == mscore.exists(tag), $sformatf("hit tag %0d", tag));
      if (mscore.exists(tag)) chk(longint'(lk_score) == mscore[tag] && int'(lk_bit) == mbit[tag],
                                  $sformatf("data tag %0d", tag));
      chk(int'(count) == mscore.num() && full == (mscore.num() == D), "count/full");
      // update
      tag = $urandom % 16;
      upd_tag   = SB_TOK_W'(tag);
      upd_keep  = ($urandom % 3) != 0;
      upd_bit   = RW'($urandom % 12);
      upd_score = $signed($urandom);
      upd_valid = upd_keep ? (mscore.exists(tag) || mscore.num() < D) : 1'b1;
      @(negedge clk);
      if (upd_valid) begin
        if (upd_keep) begin mscore[tag] = longint'(upd_score); mbit[tag] = int'(upd_bit); end
        else if (mscore.exists(tag)) begin mscore.delete(tag); mbit.delete(tag); end
      end
      upd_valid = 0;
      if (t == 1500) begin
        clear = 1; @(negedge clk); clear = 0;
        mscore.delete(); mbit.delete();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
