// lbi_pkg: number formats shared by the linearized Bregman iteration (LBI)
// trend-break core.
//
// All vectors (y, v, beta) and the intermediate values e and d are 20-bit
// two's-complement fixed-point words, the width the design is built around.
// The split between integer and fraction bits is this design's choice:
// 4 integer bits (sign included) and 16 fraction bits, enough for data
// scaled to |y| <= 1 and for v, which exceeds beta by at most lambda.
// The step size mu_k = 1/k is an unsigned 20-bit word with 1 integer and
// 19 fraction bits, so that mu_1 = 1.0 is representable.
package lbi_pkg;

  localparam int unsigned DATA_W  = 20;  // word width of y, v, beta, e, d
  localparam int unsigned FRAC_W  = 16;  // fraction bits of a data word
  localparam int unsigned MU_W    = 20;  // width of mu_k
  localparam int unsigned MU_FRAC = 19;  // fraction bits of mu_k

  typedef logic signed [DATA_W-1:0] word_t;
  typedef logic        [MU_W-1:0]   mu_t;

endpackage
