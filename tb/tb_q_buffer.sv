// tb_q_buffer: writes random Query vectors to every address, reads them back
// in random order and checks the one-cycle read latency and the data.
module tb_q_buffer;
  import bs_pkg::*;
  localparam int D = (QBUF_BYTES * 8) / (DIM * QW);
  logic clk = 0;
  always #1 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [$clog2(D)-1:0] wr_addr = 0, rd_addr = 0;
  logic [DIM-1:0][QW-1:0] wr_data = '0, rd_data;
  logic [DIM*QW-1:0] model [D];
  int checks = 0, failures = 0;

  q_buffer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      wr_en = 1; wr_addr = 7'(a);
      for (int w = 0; w < DIM * QW / 32; w++) wr_data[w*32/QW +: 8] = '0;
      wr_data = {24{$urandom}};
      model[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int a;
      a = int'($urandom % D);
      rd_en = 1; rd_addr = 7'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
