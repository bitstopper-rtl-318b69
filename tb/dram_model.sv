// dram_model: behavioural stand-in for the off-chip HBM2 memory (not
// synthesizable, testbench only).
//
// Key side: NL independent ports, one 64-bit bit-plane word per request.
// Every request is accepted at once and answered after LAT_MIN + a random
// 0..LAT_JIT-1 cycles, so replies of one port come back out of request
// order; each port returns at most one reply per cycle, oldest-due first.
// The request tag is returned with the data.
// Value side: one port, 768-bit words, replies in request order after
// LAT_MIN cycles (one per cycle).
// Requests are ignored while rst_n is low.
// Contents are written by the testbench through the kmem / vmem arrays.
// ooo_count counts Key replies that overtook an earlier request of their port.
module dram_model #(
  parameter int NL      = 32,
  parameter int DIM_P   = 64,
  parameter int QW_P    = 12,
  parameter int TAGW    = 16,
  parameter int KWORDS  = 49152,
  parameter int VWORDS  = 4096,
  parameter int SLOTS   = 80,
  parameter int LAT_MIN = 40,
  parameter int LAT_JIT = 60
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NL-1:0]         kreq_valid,
  output logic [NL-1:0]         kreq_ready,
  input  logic [31:0]           kreq_addr [NL],
  input  logic [TAGW-1:0]       kreq_tag  [NL],
  output logic [NL-1:0]         krsp_valid,
  output logic [DIM_P-1:0]      krsp_data [NL],
  output logic [TAGW-1:0]       krsp_tag  [NL],
  input  logic                  vreq_valid,
  output logic                  vreq_ready,
  input  logic [31:0]           vreq_addr,
  output logic                  vrsp_valid,
  output logic [DIM_P*QW_P-1:0] vrsp_data
);
  logic [DIM_P-1:0]      kmem [KWORDS];
  logic [DIM_P*QW_P-1:0] vmem [VWORDS];

  int          slot_due  [NL][SLOTS];
  int unsigned slot_seq  [NL][SLOTS];
  logic [31:0] slot_addr [NL][SLOTS];
  logic [TAGW-1:0] slot_tag [NL][SLOTS];
  bit          slot_busy [NL][SLOTS];
  int unsigned seq_ctr   [NL];
  longint      cyc;
  int          ooo_count;

  typedef struct { longint due; logic [31:0] addr; } vreq_t;
  vreq_t vq[$];

  initial begin
    cyc = 0;
    ooo_count = 0;
    for (int l = 0; l < NL; l++) begin
      seq_ctr[l] = 0;
      for (int s = 0; s < SLOTS; s++) slot_busy[l][s] = 0;
    end
    krsp_valid = '0;
    vrsp_valid = 1'b0;
    vrsp_data  = '0;
    for (int l = 0; l < NL; l++) begin
      krsp_data[l] = '0;
      krsp_tag[l]  = '0;
    end
  end

  assign kreq_ready = '1;
  assign vreq_ready = 1'b1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int l = 0; l < NL; l++) begin
      int best;
      best = -1;
      for (int s = 0; s < SLOTS; s++)
        if (slot_busy[l][s] && slot_due[l][s] <= cyc &&
            (best < 0 || slot_due[l][s] < slot_due[l][best])) best = s;
      krsp_valid[l] <= (best >= 0);
      if (best >= 0) begin
        for (int s = 0; s < SLOTS; s++)
          if (slot_busy[l][s] && slot_seq[l][s] < slot_seq[l][best]) begin
            ooo_count++;
            break;
          end
        krsp_data[l] <= kmem[slot_addr[l][best]];
        krsp_tag[l]  <= slot_tag[l][best];
        slot_busy[l][best] = 0;
      end
      if (kreq_valid[l] && rst_n) begin
        int f;
        f = -1;
        for (int s = 0; s < SLOTS; s++) if (!slot_busy[l][s] && f < 0) f = s;
        if (f < 0) $fatal(1, "dram_model: no free slot on port %0d", l);
        slot_busy[l][f] = 1;
        slot_due[l][f]  = int'(cyc) + LAT_MIN + int'($urandom % LAT_JIT);
        slot_seq[l][f]  = seq_ctr[l];
        slot_addr[l][f] = kreq_addr[l];
        slot_tag[l][f]  = kreq_tag[l];
        seq_ctr[l]++;
      end
    end
    vrsp_valid <= 1'b0;
    if (vq.size() > 0 && vq[0].due <= cyc) begin
      vrsp_valid <= 1'b1;
      vrsp_data  <= vmem[vq[0].addr];
      void'(vq.pop_front());
    end
    if (vreq_valid && rst_n) vq.push_back('{cyc + LAT_MIN, vreq_addr});
  end
endmodule
