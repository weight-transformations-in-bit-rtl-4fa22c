// cim_pkg: sizes and types shared by the bit-sliced compute-in-memory macro.
//
// The macro multiplies a 64-entry vector of 8-bit activations by a 64x64
// matrix of 8-bit two's-complement weights. Weight bit k of every weight is
// stored in crossbar array k (binary bit-slicing), activations are applied one
// bit per step (binary bit-streaming), 16 of the 64 rows are active per
// conversion (partial word-line activation) and each 4-bit flash ADC serves 8
// columns. The numbers below are the macro's as evaluated; the run-time mode
// selects which of the two fault-tolerance corrections is applied.
package cim_pkg;

  localparam int unsigned W_BITS    = 8;   // weight precision = number of bit-slice arrays
  localparam int unsigned A_BITS    = 8;   // activation precision = number of bit-stream steps
  localparam int unsigned ROWS      = 64;  // word lines per array
  localparam int unsigned COLS      = 64;  // bit lines per array = weight columns
  localparam int unsigned PWA_ROWS  = 16;  // rows driven together
  localparam int unsigned COL_SHARE = 8;   // columns per ADC / post-processing lane
  localparam int unsigned ADC_BITS  = 4;   // flash ADC resolution
  localparam int unsigned ACC_W     = 24;  // dot-product accumulator width

  // Post-processing mode. Sign-flip and bit-flip are alternatives and are
  // never applied together.
  typedef enum logic [1:0] {
    MODE_CVM       = 2'd0,  // closest-value mapping only: no correction
    MODE_SIGN_FLIP = 2'd1,  // negate the dot product of columns with col_flip = 1
    MODE_BIT_FLIP  = 2'd2   // replace partial sums of bit-columns with b_flip = 1 by sum(I) - psum
  } flip_mode_e;

endpackage
