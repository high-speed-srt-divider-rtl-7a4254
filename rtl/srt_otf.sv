// srt_otf: on-the-fly conversion of radix-4 signed digits to binary.
//
// Two registers are kept while the digits arrive, most significant first:
//   A = the quotient so far,  Q[k]
//   B = A minus one unit in its last place, Q[k] - 4^-k
// Each digit q appends two bits to both registers, and each new value takes
// as its prefix either A or B, so no carry ever has to propagate:
//
//   q   | A[k+1]           | B[k+1]
//   ----+------------------+-----------------
//    2  | (A[k], 1, 0)     | (A[k], 0, 1)
//    1  | (A[k], 0, 1)     | (A[k], 0, 0)
//    0  | (A[k], 0, 0)     | (B[k], 1, 1)
//   -1  | (B[k], 1, 1)     | (B[k], 1, 0)
//   -2  | (B[k], 1, 0)     | (B[k], 0, 1)
//
// The appended pairs are q mod 4 for A and (q - 1) mod 4 for B. The A column
// and the B entries for q = 0, 1, 2 are those of the paper's reduced table;
// the paper prints B pairs 00 for q = -1 and 11 for q = -2 and shows A[k] and
// B[k] as the only prefixes, which does not give Q - ulp; the standard
// prefix selection and pairs are used here instead.
//
// B starts at all ones (0 - 1 ulp, modulo 2^QW) and A at zero. After the last
// digit A is the truncated quotient and B the quotient minus one ulp; the
// divider picks B when its final remainder is negative.
//
// Interface: init clears the registers on a clock edge; en appends digit q.
// init has priority. Outputs are the registers themselves.
module srt_otf
  import srt_pkg::*;
#(
  parameter int unsigned QW = 56   // quotient bits, two per digit
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          en,
  input  digit_t        q,
  output logic [QW-1:0] a,
  output logic [QW-1:0] b
);

  logic [QW-1:0] a_next, b_next;
  logic [1:0]    a_pair, b_pair;

  assign a_pair = q[1:0];              // q mod 4
  assign b_pair = q[1:0] - 2'b01;      // (q - 1) mod 4

  always_comb begin
    a_next = (q >= 0) ? {a[QW-3:0], a_pair} : {b[QW-3:0], a_pair};
    b_next = (q >  0) ? {a[QW-3:0], b_pair} : {b[QW-3:0], b_pair};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a <= '0;
      b <= '1;
    end else if (init) begin
      a <= '0;
      b <= '1;
    end else if (en) begin
      a <= a_next;
      b <= b_next;
    end
  end

endmodule
