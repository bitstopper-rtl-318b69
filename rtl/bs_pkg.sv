// bs_pkg: constants shared by the bit-serial attention accelerator.
//
// Holds the default sizes of the design. The sizes printed in the paper's
// hardware table are used directly: 32 PE lanes, 64-dimensional 12-bit
// Query/Key/Value vectors split into twelve 1-bit Key planes, a 64-entry x
// 45-bit scoreboard per lane, a 64-way 12b x 12b MAC array, an 18-bit
// softmax and 8 kB / 256 kB / 64 kB Q / K / V buffers. Everything else
// (score width 32 as printed on the lane figure, token index widths,
// fixed-point formats) is this design's own choice and is noted where used.
package bs_pkg;
  localparam int DIM      = 64;   // head dimension processed per cycle
  localparam int QW       = 12;   // INT12 Query / Key / Value
  localparam int NPLANES  = 12;   // bit planes per Key element
  localparam int RW       = 4;    // width of a bit-plane index (0 = MSB)
  localparam int LANES    = 32;   // bit-level PE lanes in the QK-PU
  localparam int SB_DEPTH = 64;   // scoreboard entries per lane
  localparam int SB_TOK_W = 8;    // token tag stored in a scoreboard entry
  localparam int SCORE_W  = 32;   // partial score register width
  localparam int THR_W    = 34;   // threshold / bound arithmetic width
  localparam int MAX_SEQ  = 4096; // longest Key sequence per query
  localparam int ALPHA_W  = 9;    // alpha in Q1.8, 256 = 1.0
  localparam int RAD_W    = 32;   // radius in integer score units
  localparam int SM_W     = 18;   // softmax input / output width
  localparam int SMS_W    = 16;   // softmax scale factor width (Q(-8).24)
  localparam int MAC_W    = 40;   // MAC accumulator width
  localparam int ADDR_W   = 32;   // DRAM word address width
  localparam int QBUF_BYTES = 8 * 1024;
  localparam int KBUF_BYTES = 256 * 1024;
  localparam int VBUF_BYTES = 64 * 1024;
endpackage
