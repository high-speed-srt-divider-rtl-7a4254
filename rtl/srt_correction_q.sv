// srt_correction_q: correction bit q* of the quotient prediction.
//
// After the interim digit q# is chosen, the true radix-4 digit is q# or
// q# + 1. The candidate remainder P^0 = P - q# D lies in the common overlap
// region of Fig. 3/Table I of the method: q# + 1 is allowed when
// P^0 >= D/3 and q# is allowed when P^0 <= 2D/3. A step between the two
// lines separates them (the step found by the fuzzy inference):
//
//   threshold 0.01 (1/4)  for D in [0.10, 0.11)   (D < 3/4)
//   threshold 0.10 (1/2)  for D in [0.11, 1.00)   (D >= 3/4)
//
// which gives the sum of products
//
//   q* = S' (P_int + P_-1 + P_-2 d'_-2)
//
// with S the sign of P^0, P_int its integer bits, P_-1 and P_-2 its first two
// fraction bits and d_-2 the second fraction bit of the normalised divisor
// D = 0.1 d_-2 d_-3 ... The thresholds and the equation follow the paper; the
// paper writes the integer part as a single bit P_0, here both integer bits
// of the three-bit integer field are ORed, since P^0 can reach 2.
//
// Interface: p0_top = {sign, 2^1, 2^0, 2^-1, 2^-2} bits of P^0, d_m2 the 2^-2
// bit of D. Purely combinational.
module srt_correction_q (
  input  logic [4:0] p0_top,
  input  logic       d_m2,
  output logic       q_corr
);

  logic sign, p_int, p_m1, p_m2;

  assign sign  = p0_top[4];
  assign p_int = p0_top[3] | p0_top[2];
  assign p_m1  = p0_top[1];
  assign p_m2  = p0_top[0];

  assign q_corr = !sign && (p_int || p_m1 || (p_m2 && !d_m2));

endmodule
