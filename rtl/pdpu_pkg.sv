// pdpu_pkg -- shared constants and width helpers of the posit dot-product unit.
//
// The default format numbers are the main configuration of the design: inputs
// in P(13,2), accumulator and output in P(16,2), dot-product size N = 4 and an
// aligned-mantissa width W_m = 14. The helper functions derive the internal
// widths (significand, scale, accumulator) from those numbers so that every
// module agrees on them.
package pdpu_pkg;

  // Main configuration: mixed precision P(13/16,2), N = 4, W_m = 14.
  localparam int unsigned DefNIn  = 13;
  localparam int unsigned DefEsIn = 2;
  localparam int unsigned DefNOut = 16;
  localparam int unsigned DefEsOut = 2;
  localparam int unsigned DefN    = 4;
  localparam int unsigned DefWm   = 14;

  // Significand width of a P(n,es) posit including the hidden bit:
  // n bits minus sign, at least two regime bits and es exponent bits, plus one.
  function automatic int unsigned mant_w(int unsigned n, int unsigned es);
    return n - es - 2;
  endfunction

  // Width of the signed scale k*2^es + e of a P(n,es) posit.
  // |scale| < n * 2^es, so clog2(n * 2^es) magnitude bits plus a sign bit.
  function automatic int unsigned scale_w(int unsigned n, int unsigned es);
    return $clog2(n << es) + 1;
  endfunction

  function automatic int unsigned max2(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

  // Bits of a leading-zero count of a w-bit word (counts 0..w).
  function automatic int unsigned cnt_w(int unsigned w);
    return $clog2(w + 1);
  endfunction

endpackage
