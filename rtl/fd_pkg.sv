// fd_pkg: types and constants shared by the FLASH-D attention kernel.
//
// The kernel moves scores, weights and vectors around as small floating-point
// words (BFloat16 by default: 1 sign, 8 exponent, 7 mantissa bits). The two
// non-linear functions, ln and sigmoid, work internally on signed fixed-point
// numbers with FRAC fractional bits; FIX_W bits hold the range +-2^(FIX_W-FRAC-1).
// These fixed-point widths are a choice of this implementation; the published
// description only says that both functions are piece-wise linear with
// eight segments.
package fd_pkg;

  // Fixed-point format of the non-linear datapath.
  localparam int FRAC  = 20;
  localparam int FIX_W = 28;
  typedef logic signed [FIX_W-1:0] fix_t;

  // Source of the weight w_i chosen by the weight unit (the two multiplexers
  // of the weight datapath). WSEL_LOW and WSEL_HIGH are the out-of-range
  // defaults; WSEL_START is the first key of a query, where w_1 = 1.
  typedef enum logic [1:0] {
    WSEL_SIGMOID = 2'd0,
    WSEL_LOW     = 2'd1,
    WSEL_HIGH    = 2'd2,
    WSEL_START   = 2'd3
  } wsel_t;

  // Active region of the score difference s_i - s_{i-1}.
  localparam int DIFF_LOW  = -6;
  localparam int DIFF_HIGH = 11;

  // Sideband carried down the pipeline with every key/value pair.
  typedef struct packed {
    logic first;  // first key of the sequence (w_i = 1)
    logic last;   // last key of the sequence (o_i is the attention result)
  } kv_tag_t;

endpackage
