// fusioncim_pkg: constants and small types shared by the FusionCIM blocks.
//
// The array sizes (16 hybrid engines, 128x128 CIM macros, 4-word banks, 8-bit
// operands, 128-vector KV tiles, 16-bit output words) are the numbers of the
// published configuration.  The fixed-point formats of the softmax path
// (Q1.22 Taylor coefficients, 14-bit exponent fraction, 8-bit probabilities)
// are this implementation's own choice; the published design uses FP16 there.
package fusioncim_pkg;

  // ---- array organisation -------------------------------------------------
  localparam int unsigned NUM_HE     = 16;   // hybrid engines
  localparam int unsigned ARRAY_ROWS = 128;  // queries per Q tile = KV vectors per tile
  localparam int unsigned ARRAY_COLS = 128;  // head dimension
  localparam int unsigned BANK_DEPTH = 4;    // words per CIM bank (4x8 query, 4x16 output)
  localparam int unsigned QW         = 8;    // query / key / value precision (INT8)
  localparam int unsigned OW         = 16;   // output word in the OP-CIM bank

  // ---- softmax fixed point -------------------------------------------------
  localparam int unsigned PW    = 8;         // probability p and rescale factor alpha, Q0.8
  localparam int unsigned CW    = 24;        // Taylor coefficient width
  localparam int unsigned CF    = 22;        // coefficient fraction bits (Q1.22)
  localparam int unsigned FF    = 14;        // fraction bits of the base-2 exponent
  localparam int unsigned NCOEF = 9;         // c0 .. c8, eight Horner steps
  localparam int unsigned LOG2E_Q14 = 23637; // round(log2(e) * 2^14)
  localparam int unsigned LW    = 24;        // running row sum l, Q.8

  // ---- global buffer / DRAM -------------------------------------------------
  localparam int unsigned GB_BYTES = 1 << 20;         // 1 MB global buffer
  localparam int unsigned KV_W     = 2 * ARRAY_COLS * QW;   // one K vector and one V vector
  localparam int unsigned GB_WORDS = GB_BYTES / (KV_W / 8);
  localparam int unsigned DRAM_BEAT_W = 512;

  // Kind of a flit on the on-chip network.
  typedef enum logic [0:0] {
    FLIT_KV = 1'b0,   // one K vector and one V vector of a tile
    FLIT_Q  = 1'b1    // one Q row (in the K field) for one engine
  } flit_kind_e;

endpackage
