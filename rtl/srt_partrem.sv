// srt_partrem: the two candidate partial remainders of one radix-4 step.
//
// The recurrence is p[j+1] = 4 p[j] - q[j+1] D. Because the digit is known
// only as "q# or q# + 1" until the correction bit arrives, both remainders
// are formed at the same time from the interim digit:
//
//   P^0 = P - q#      D     (used when q* = 0)
//   P^1 = P - (q# + 1) D    (used when q* = 1)
//
// with P = 4 p[j]. q# is in {-2,-1,0,1}, so each candidate is one adder whose
// second operand is a multiplexer over {+2D, +D, 0, -D, -2D}. The two
// parallel remainders follow the paper (its partrem1 and partrem2); the
// choice between them is made by the caller.
//
// Interface: W-bit two's complement fixed point in and out (same binary
// point for P, D and the results). Purely combinational.
module srt_partrem
  import srt_pkg::*;
#(
  parameter int unsigned W = 58
) (
  input  logic signed [W-1:0] p,       // shifted remainder P = 4p[j]
  input  logic signed [W-1:0] d,       // divisor D
  input  digit_t              q_int,   // interim digit q#
  output logic signed [W-1:0] p0,      // P - q# D
  output logic signed [W-1:0] p1       // P - (q#+1) D
);

  // k * D for k in {-2..2}
  function automatic logic signed [W-1:0] times_d(input logic signed [3:0] k,
                                                  input logic signed [W-1:0] dv);
    unique case (k)
      4'sd2:   return dv <<< 1;
      4'sd1:   return dv;
      -4'sd1:  return -dv;
      -4'sd2:  return -(dv <<< 1);
      default: return '0;
    endcase
  endfunction

  logic signed [3:0] k0, k1;

  assign k0 = 4'(q_int);
  assign k1 = k0 + 4'sd1;
  assign p0 = p - times_d(k0, d);
  assign p1 = p - times_d(k1, d);

endmodule
