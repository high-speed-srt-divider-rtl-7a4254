// srt_mant_div: iterative radix-4 SRT divider for normalised significands.
//
// Divides two MANT_W-bit significands x, y in [1, 2) (hidden bit included,
// MSB set). One radix-4 digit is retired per clock cycle with the
// predict-and-correct scheme:
//
//   P   = 4 p[j]                         (a wire shift)
//   q#  = srt_interim_q(top 4 bits of P)        -- in parallel --
//   P^0 = P - q# D,  P^1 = P - (q#+1) D  (srt_partrem)
//   q*  = srt_correction_q(top 5 bits of P^0, d_-2)
//   q   = q# + q*,   p[j+1] = q* ? P^1 : P^0
//   A, B updated on the fly from q (srt_otf)
//
// The recurrence is p[j+1] = 4 p[j] - q D with D = y/2 in [1/2, 1) and
// p[0] = x/8, so |p[0]| <= 2D/3 and the remainder stays in [-2D/3, 2D/3].
// After ITER = (MANT_W+4)/2 steps the quotient x/(4y) is known to weight
// 4^-ITER: quot = A, or B (= A - 1 ulp) when the last remainder is negative,
// and sticky tells whether the remainder is non-zero. The two parallel
// candidate remainders, the interim/correction digit pair and the on-the-fly
// table follow the paper; the x/8 and y/2 scaling, the number of steps and the
// one-digit-per-cycle iterative schedule are this design's choices.
//
// Timing: start is taken whenever busy is low, on a clock edge, which loads the
// operands. The ITER following edges each retire a digit. done is high for
// one cycle after the last digit, with quot and sticky valid in that cycle;
// they stay valid until the next start. Thus done rises ITER+1 edges after
// the edge that accepted start.
module srt_mant_div
  import srt_pkg::*;
#(
  parameter int unsigned MANT_W = 53,
  localparam int unsigned ITER  = iterations(MANT_W),
  localparam int unsigned QW    = 2 * ITER,
  localparam int unsigned FRAC  = rem_frac(MANT_W),
  localparam int unsigned W     = REM_INT + FRAC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [MANT_W-1:0] x,        // dividend significand, 1.f
  input  logic [MANT_W-1:0] y,        // divisor significand, 1.f
  output logic              busy,
  output logic              done,
  output logic [QW-1:0]     quot,     // x/(4y), weight of bit i is 2^(i-QW)
  output logic              sticky    // final remainder non-zero
);

  typedef enum logic [1:0] {S_IDLE, S_ITER, S_DONE} state_t;

  state_t               state;
  logic [$clog2(ITER+1)-1:0] cnt;
  logic signed [W-1:0]  p_q;          // partial remainder p[j]
  logic signed [W-1:0]  d_q;          // divisor D

  logic signed [W-1:0]  p_sh;
  logic signed [W-1:0]  cand0, cand1, p_next;
  digit_t               q_int, q_dig;
  logic                 q_corr;
  logic [QW-1:0]        a_reg, b_reg;

  // One radix-4 step
  assign p_sh = p_q <<< 2;

  srt_interim_q u_interim (
    .p_top (p_sh[W-1 -: 4]),
    .q_int (q_int)
  );

  srt_partrem #(.W(W)) u_partrem (
    .p     (p_sh),
    .d     (d_q),
    .q_int (q_int),
    .p0    (cand0),
    .p1    (cand1)
  );

  srt_correction_q u_corr (
    .p0_top (cand0[W-1 -: 5]),
    .d_m2   (d_q[FRAC-2]),
    .q_corr (q_corr)
  );

  assign q_dig  = q_int + digit_t'({2'b00, q_corr});
  assign p_next = q_corr ? cand1 : cand0;

  srt_otf #(.QW(QW)) u_otf (
    .clk   (clk),
    .rst_n (rst_n),
    .init  (start && !busy),
    .en    (state == S_ITER),
    .q     (q_dig),
    .a     (a_reg),
    .b     (b_reg)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      p_q   <= '0;
      d_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_ITER;
          cnt   <= ($clog2(ITER+1))'(ITER);
          p_q   <= W'(x);                 // x / 8
          d_q   <= W'(y) << 2;            // y / 2
        end else if (state == S_DONE) begin
          state <= S_IDLE;
        end
        S_ITER: begin
          p_q <= p_next;
          cnt <= cnt - 1'b1;
          if (cnt == 1) state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy   = (state == S_ITER);
  assign done   = (state == S_DONE);
  assign quot   = p_q[W-1] ? b_reg : a_reg;
  assign sticky = (p_q != '0);

  // The remainder bound |p| <= 2D/3 implies |p| < D.
  property p_bounded;
    @(posedge clk) disable iff (!rst_n)
      (state == S_ITER) |-> ((p_next < d_q) && (p_next > -d_q));
  endproperty
  a_bounded: assert property (p_bounded)
    else $error("srt_mant_div: remainder left its bound");

endmodule
