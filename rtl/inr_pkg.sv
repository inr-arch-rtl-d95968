// inr_pkg: number format and fixed-point helpers shared by every kernel of
// the dataflow library.
//
// Data travels through the design as signed two's-complement fixed point,
// 32 bits wide with 10 integer bits (sign included) and 22 fraction bits,
// the format used for the evaluated accelerators. Arithmetic follows the
// default behaviour of an arbitrary-precision fixed-point type in HLS:
// results are truncated toward minus infinity and wrap on overflow (no
// saturation). The truncate/wrap choice is this design's own; the word
// format is the evaluated one.
package inr_pkg;

  localparam int unsigned DATA_W    = 32;  // total bits of one element
  localparam int unsigned INT_BITS  = 10;  // integer bits, sign included
  localparam int unsigned FRAC_BITS = DATA_W - INT_BITS;  // 22

  typedef logic signed [DATA_W-1:0] data_t;

  // Fixed-point add: wraps on overflow.
  function automatic data_t fx_add(input data_t a, input data_t b);
    return data_t'(a + b);
  endfunction

  // Fixed-point multiply: full 64-bit product, truncated back to the
  // element format (floor of the exact product, then wrap).
  function automatic data_t fx_mul(input data_t a, input data_t b);
    logic signed [2*DATA_W-1:0] p;
    p = 64'(a) * 64'(b);
    return data_t'(p >>> FRAC_BITS);
  endfunction

endpackage
