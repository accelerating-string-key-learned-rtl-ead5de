// sia_pkg: types and constants shared by the incremental-training accelerator.
//
// Every matrix element (key characters, R entries, inverse entries) is a signed
// 64-bit fixed-point number with 32 fractional bits (Q31.32).  The 64-bit word
// follows the paper's sizing of an R element as 8 bytes; choosing fixed point
// rather than IEEE double is this design's own choice.  Products and dot-product
// sums are kept at full 128-bit precision (Q63.64) and rounded back to Q31.32
// by truncation (arithmetic shift right by FRAC).
package sia_pkg;

  parameter int W    = 64;   // element width
  parameter int FRAC = 32;   // fractional bits of an element
  parameter int AW   = 128;  // accumulator width (Q63.64)

  typedef logic signed [W-1:0]  fx_t;
  typedef logic signed [AW-1:0] acc_t;

  // Training mode of one job: cold training starts from X alone, incremental
  // training folds the memoized R_old into the result.
  typedef enum logic {
    MODE_COLD = 1'b0,
    MODE_INCR = 1'b1
  } train_mode_e;

  // Q31.32 x Q31.32 -> Q31.32, truncating.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return fx_t'(p >>> FRAC);
  endfunction

  // Integer -> Q31.32.
  function automatic fx_t fx_from_int(int v);
    return fx_t'(longint'(v)) <<< FRAC;
  endfunction

endpackage
