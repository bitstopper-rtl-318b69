// k_buffer: on-chip Key bit-plane buffer of the QK-PU.
//
// One bank per PE lane. Bit planes returned by memory (64 bits each, tagged
// with token index and plane index) are queued in their lane's bank, in
// arrival order, until the lane takes them. With the defaults the banks
// hold 32 x 1024 planes = 256 kB, the K-buffer size in the paper's table.
// The banks decouple the irregular arrival of planes from the lanes; a
// lane reads at most one plane per cycle, which at 32 lanes is the 256 B
// per cycle the paper matches to HBM2 bandwidth.
// Organising the buffer as per-lane arrival queues is this design's choice;
// the paper gives only its size and place.
// Lint note: rst_n is reported as used both asynchronously and synchronously
// (SYNCASYNCNET). The synchronous use is only the 'disable iff (!rst_n)' of the
// handshake assertions in its sub-blocks; every flip-flop uses rst_n as an asynchronous reset.
module k_buffer
  import bs_pkg::*;
#(
  parameter int NL    = LANES,
  parameter int DIM_P = DIM,
  parameter int TOKW  = $clog2(MAX_SEQ),
  parameter int DEPTH = (KBUF_BYTES * 8) / (LANES * DIM)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic [NL-1:0]         wr_valid,
  input  logic [DIM_P-1:0]      wr_plane [NL],
  input  logic [TOKW-1:0]       wr_tok   [NL],
  input  logic [RW-1:0]         wr_r     [NL],
  output logic [NL-1:0]         rd_valid,
  input  logic [NL-1:0]         rd_ready,
  output logic [DIM_P-1:0]      rd_plane [NL],
  output logic [TOKW-1:0]       rd_tok   [NL],
  output logic [RW-1:0]         rd_r     [NL],
  output logic [NL-1:0]         bank_full
);
  localparam int EW = DIM_P + TOKW + RW;

  for (genvar l = 0; l < NL; l++) begin : g_bank
    logic [EW-1:0] head;
    logic          emp;
    sync_fifo #(.W(EW), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .clear,
      .push(wr_valid[l]), .wr_data({wr_plane[l], wr_tok[l], wr_r[l]}),
      .pop(rd_valid[l] && rd_ready[l]), .rd_data(head),
      .empty(emp), .full(bank_full[l]), .count());
    assign rd_valid[l] = !emp;
    assign {rd_plane[l], rd_tok[l], rd_r[l]} = head;
  end
endmodule
