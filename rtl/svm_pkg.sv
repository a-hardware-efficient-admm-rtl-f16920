// svm_pkg: number format and shared helpers of the ADMM SVM training processor.
//
// All datapath values are two's-complement fixed point, 32 bits wide with 16
// fractional bits (Q15.16). The word length and the binary point are this
// design's own choice; the source publication gives no word length. The ADMM
// constants lambda = 10 and mu1 = 1 are the values used in its evaluation.
package svm_pkg;

  localparam int unsigned FIX_W  = 32;
  localparam int unsigned FRAC_W = 16;

  typedef logic signed [FIX_W-1:0] fix_t;

  localparam fix_t FIX_ONE    = fix_t'(1 << FRAC_W);
  localparam fix_t FIX_LAMBDA = fix_t'(10 << FRAC_W);   // regularisation lambda = 10
  localparam fix_t FIX_MU1    = fix_t'(1 << FRAC_W);    // penalty mu1 = 1

  // PE operating modes set by the configuration controller.
  typedef enum logic [1:0] {
    PE_IDLE = 2'd0,   // hold accumulators
    PE_CLR  = 2'd1,   // clear accumulators
    PE_MAC  = 2'd2    // acc[k] += a[k] * b[k]
  } pe_mode_e;

  // Fixed-point product, rounded toward minus infinity, wrapped to 32 bits.
  function automatic fix_t fmul(fix_t a, fix_t b);
    logic signed [2*FIX_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fix_t'(p >>> FRAC_W);
  endfunction

endpackage
