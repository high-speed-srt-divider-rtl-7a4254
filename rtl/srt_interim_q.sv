// srt_interim_q: interim quotient digit estimate q#.
//
// The shifted partial remainder P = 4p is compared with the three partition
// lines of the uniform-overlap P-D plot: 111.1 (-1/2), 0 and 000.1 (+1/2).
// Only the sign, the two integer bits and the first fraction bit of P are
// needed, so the decision does not depend on the divisor at all:
//
//   q# =  1   when  P >= 000.1
//   q# =  0   when  0 <= P < 000.1
//   q# = -1   when  111.1 <= P < 0
//   q# = -2   when  P < 111.1
//
// The true digit is then q# or q# + 1; srt_correction_q decides which.
// The partition lines and the four-way decision follow the paper; where its
// regions share an end point (P exactly 1/2 or exactly 0) the upper region
// is taken, which either digit tolerates.
//
// Interface: p_top = {sign, 2^1, 2^0, 2^-1} bits of P. Purely combinational.
module srt_interim_q
  import srt_pkg::*;
(
  input  logic [3:0] p_top,
  output digit_t     q_int
);

  logic sign;
  logic ge_half;     // P >= +1/2 for positive P
  logic ge_mhalf;    // P >= -1/2 for negative P

  assign sign     = p_top[3];
  assign ge_half  = |p_top[2:0];
  assign ge_mhalf = &p_top[2:0];

  always_comb begin
    if (!sign) q_int = ge_half  ? digit_t'(1)  : digit_t'(0);
    else       q_int = ge_mhalf ? digit_t'(-1) : digit_t'(-2);
  end

endmodule
