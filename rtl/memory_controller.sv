// memory_controller: request arbitration and address generation towards DRAM.
//
// Key planes: each lane has its own request port towards memory (64 bits
// per lane per cycle, together the HBM2 bandwidth assumed by the paper).
// Per lane the controller grants, each cycle, either the lane's next-plane
// request (a token that survived, priority) or the scheduler's sign-plane
// request for a new Key, and forms the word address of the 64-bit plane in
// a bit-plane-major Key layout:
//     addr = k_base + r * seq_len + j          (plane r of Key j)
// Request and response carry the tag {j, r}; responses may return in any
// order and are written, with their tag, into the lane's K-buffer bank.
// Values: indices of surviving tokens are taken from the V-PU's IDX-FIFO and
// Value vector j is read from addr = v_base + j (one 768-bit word per
// vector). A request is only issued if its reply is sure to find room in the
// V buffer (in-flight replies + buffered vectors < V buffer depth).
// The paper only names this block; the arbitration priority, address map and
// credit rule are this design's choices. Combinational apart from the
// V credit counter.
// Many output bits are wires from inputs (returned Key planes and tags go
// straight to the K buffer, returned Values straight to the V buffer); the
// block adds no storage on the data path, by design.
module memory_controller
  import bs_pkg::*;
#(
  parameter int NL     = LANES,
  parameter int DIM_P  = DIM,
  parameter int QW_P   = QW,
  parameter int TOKW   = $clog2(MAX_SEQ),
  parameter int VDEPTH = (VBUF_BYTES * 8) / (DIM * QW)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ADDR_W-1:0]    k_base,
  input  logic [ADDR_W-1:0]    v_base,
  input  logic [TOKW:0]        seq_len,
  // next-plane requests from the lanes
  input  logic [NL-1:0]        lane_valid,
  output logic [NL-1:0]        lane_ready,
  input  logic [TOKW-1:0]      lane_tok [NL],
  input  logic [RW-1:0]        lane_r   [NL],
  // new-Key (sign plane) requests from the scheduler
  input  logic [NL-1:0]        new_valid,
  output logic [NL-1:0]        new_ready,
  input  logic [TOKW-1:0]      new_tok [NL],
  // DRAM Key-plane ports
  output logic [NL-1:0]        kreq_valid,
  input  logic [NL-1:0]        kreq_ready,
  output logic [ADDR_W-1:0]    kreq_addr [NL],
  output logic [TOKW+RW-1:0]   kreq_tag  [NL],
  input  logic [NL-1:0]        krsp_valid,
  input  logic [DIM_P-1:0]     krsp_data [NL],
  input  logic [TOKW+RW-1:0]   krsp_tag  [NL],
  // K-buffer write side
  output logic [NL-1:0]        kbuf_wr,
  output logic [DIM_P-1:0]     kbuf_plane [NL],
  output logic [TOKW-1:0]      kbuf_tok   [NL],
  output logic [RW-1:0]        kbuf_r     [NL],
  // Value fetch
  input  logic                 vidx_valid,
  input  logic [TOKW-1:0]      vidx_tok,
  output logic                 vidx_pop,
  input  logic [$clog2(VDEPTH+1)-1:0] vbuf_count,
  output logic                 vreq_valid,
  input  logic                 vreq_ready,
  output logic [ADDR_W-1:0]    vreq_addr,
  input  logic                 vrsp_valid,
  input  logic [DIM_P*QW_P-1:0] vrsp_data,
  output logic                 vbuf_wr,
  output logic [DIM_P*QW_P-1:0] vbuf_data,
  output logic [NL-1:0]        new_blocked   // lane request took the port
);
  localparam int CW = $clog2(VDEPTH + 1) + 1;
  logic [CW-1:0] v_out;

  logic [TOKW-1:0] t [NL];
  logic [RW-1:0]   r [NL];
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      lane_ready[l]  = kreq_ready[l];
      new_ready[l]   = kreq_ready[l] && !lane_valid[l];
      new_blocked[l] = new_valid[l] && lane_valid[l];
      kreq_valid[l]  = lane_valid[l] || new_valid[l];
      t[l]           = lane_valid[l] ? lane_tok[l] : new_tok[l];
      r[l]           = lane_valid[l] ? lane_r[l]   : '0;
      kreq_tag[l]    = {t[l], r[l]};
      kreq_addr[l]   = k_base + ADDR_W'(r[l]) * ADDR_W'(seq_len) + ADDR_W'(t[l]);
      kbuf_wr[l]     = krsp_valid[l];
      kbuf_plane[l]  = krsp_data[l];
      {kbuf_tok[l], kbuf_r[l]} = krsp_tag[l];
    end
    vreq_valid = vidx_valid && ((CW'(v_out) + CW'(vbuf_count)) < CW'(VDEPTH));
    vreq_addr  = v_base + ADDR_W'(vidx_tok);
    vidx_pop   = vreq_valid && vreq_ready;
    vbuf_wr    = vrsp_valid;
    vbuf_data  = vrsp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_out <= '0;
    else        v_out <= v_out + CW'(vidx_pop) - CW'(vrsp_valid);
  end
endmodule
