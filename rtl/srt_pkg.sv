// srt_pkg: types and width rules shared by the radix-4 SRT divider.
//
// Quotient digits are radix 4 with the digit set {-2,-1,0,1,2} (redundancy
// factor 2/3), held as 3-bit two's complement numbers. The interim digit q#
// of the quotient prediction only takes {-2,-1,0,1}; the correction bit q*
// adds 0 or 1 to it.
//
// Partial remainders are two's complement fixed-point numbers with three
// integer bits (sign included) and rem_frac(MANT_W) fraction bits. Three
// integer bits hold the shifted remainder P = 4p, whose magnitude stays below
// 8/3 D < 8/3, and the candidates P - kD with k in {-2..2}.
package srt_pkg;

  typedef logic signed [2:0] digit_t;

  // Integer bits of a partial remainder, sign included.
  localparam int unsigned REM_INT = 3;

  // Radix-4 iterations for an MANT_W-bit significand. The quotient has its
  // leading one at weight 2^-2 or 2^-3, and MANT_W bits plus a guard bit are
  // needed below it, so digits must reach weight 2^-(MANT_W+3).
  function automatic int unsigned iterations(int unsigned mant_w);
    return (mant_w + 4) / 2;
  endfunction

  // Fraction bits of a partial remainder. The first remainder is the
  // dividend significand (MANT_W-1 fraction bits) divided by 8.
  function automatic int unsigned rem_frac(int unsigned mant_w);
    return mant_w + 2;
  endfunction

endpackage
