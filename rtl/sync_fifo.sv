// sync_fifo: single-clock first-word-fall-through FIFO.
//
// DEPTH entries of W bits held in a memory array; any DEPTH (not only powers
// of two). 'rd_data' shows the head entry whenever 'empty' is low; 'pop'
// removes it and 'push' appends 'wr_data', both in the same cycle if wanted.
// Pushing when full or popping when empty is a protocol error (asserted).
// Helper used for the K-buffer banks and the V-PU FIFOs.
// Lint note: rst_n is reported as used both asynchronously and synchronously
// (SYNCASYNCNET). The synchronous use is only the 'disable iff (!rst_n)' of the
// handshake assertions; every flip-flop uses rst_n as an asynchronous reset.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  logic [W-1:0]  wr_data,
  input  logic          pop,
  output logic [W-1:0]  rd_data,
  output logic          empty,
  output logic          full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + AW'(1);
  endfunction

  assign rd_data = mem[rp];
  assign empty   = (count == '0);
  assign full    = (int'(count) == DEPTH);

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else if (clear) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= incr(wp);
      if (pop)  rp <= incr(rp);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
