// q_buffer: on-chip Query buffer.
//
// Holds whole Query vectors (DIM x 12 bit = 96 bytes each). The default
// depth, 85 vectors, is the 8 kB of the paper's hardware table divided by the
// vector size. One write port, loaded by the host; one synchronous read
// port: the vector at rd_addr appears on rd_data one cycle after rd_en.
// The vector-wide organisation is this design's choice.
module q_buffer
  import bs_pkg::*;
#(
  parameter int DIM_P = DIM,
  parameter int QW_P  = QW,
  parameter int DEPTH = (QBUF_BYTES * 8) / (DIM * QW)
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [$clog2(DEPTH)-1:0]    wr_addr,
  input  logic [DIM_P-1:0][QW_P-1:0]  wr_data,
  input  logic                        rd_en,
  input  logic [$clog2(DEPTH)-1:0]    rd_addr,
  output logic [DIM_P-1:0][QW_P-1:0]  rd_data
);
  logic [DIM_P*QW_P-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
