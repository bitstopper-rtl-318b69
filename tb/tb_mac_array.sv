// tb_mac_array: random weights and Value vectors, with pauses and clears,
// against 64 reference accumulators.
module tb_mac_array;
  import bs_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  always #1 clk = ~clk;
  logic [11:0] w = 0;
  logic [DIM-1:0][QW-1:0] v = '0;
  logic signed [MAC_W-1:0] acc [DIM];
  longint ref_acc [DIM];
  int checks = 0, failures = 0;

  mac_array dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int k = 0; k < DIM; k++) ref_acc[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      en = ($urandom % 4) != 0;
      clear = (t % 1000) == 999;
      w = (t < 50) ? 12'hfff : 12'($urandom);
      for (int k = 0; k < DIM; k++) v[k] = (t < 50) ? 12'h800 : 12'($urandom);
      @(negedge clk);
      for (int k = 0; k < DIM; k++) begin
        if (clear) ref_acc[k] = 0;
        else if (en) ref_acc[k] += longint'(w) * longint'($signed(v[k]));
        checks++;
        if (longint'(acc[k]) != ref_acc[k]) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d %0d vs %0d", k, acc[k], ref_acc[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
