// fp_div64: IEEE-754 double-precision divider built on a radix-4 SRT core.
//
// result = a / b for binary64 operands (other binary formats through
// EXP_W/FRAC_W). The significand quotient comes from srt_mant_div, the
// predict-and-correct radix-4 SRT divider with on-the-fly conversion; around
// it this module
//   - unpacks both operands and classifies them (zero, normal, inf, NaN),
//   - forms the sign (sa xor sb) and the biased exponent ea - eb + bias,
//   - normalises the quotient: x/y lies in (1/2, 2), so the core's result has
//     its leading one at weight 2^-2 (x >= y) or 2^-3 (x < y, exponent - 1),
//   - rounds to nearest, ties to even, from the guard bit and a sticky bit
//     made of the lower quotient bits and the non-zero final remainder,
//   - packs the result, giving +-inf on exponent overflow and a signed zero
//     when the exponent falls below the normal range.
// Special operands follow IEEE-754: NaN in, 0/0 and inf/inf give the quiet
// NaN 0x7FF8...; x/0 and inf/x give a signed infinity; 0/x and x/inf give a
// signed zero. Subnormal operands are read as zero and subnormal results are
// flushed to zero. The paper states only that the divider works on 64-bit
// double-precision numbers; the wrapper, the rounding mode and the
// subnormal handling are this design's choices.
//
// Interface: in_valid/in_ready accept one operand pair; out_valid/out_ready
// hand out one result, held until taken. One division is in flight at a time.
// Timing: out_valid rises ITER+1 clock edges after the accepting edge, 29 for
// binary64 (one load edge and 28 radix-4 steps). Normalising, rounding and
// packing are combinational from the core's held registers, so the result is
// valid in the same cycle as the core's done pulse. Only the sign, the
// exponent and a 2-bit special-result code are registered here.
module fp_div64
  import fp_pkg::*;
  import srt_pkg::*;
#(
  parameter int unsigned EXP_W  = 11,
  parameter int unsigned FRAC_W = 52,
  localparam int unsigned WIDTH  = 1 + EXP_W + FRAC_W,
  localparam int unsigned MANT_W = FRAC_W + 1,
  localparam int unsigned QW     = 2 * iterations(MANT_W),
  localparam int unsigned EW     = EXP_W + 2            // signed exponent work width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] a,          // dividend
  input  logic [WIDTH-1:0] b,          // divisor
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] result      // a / b
);

  typedef struct packed {
    logic              sign;
    logic [EXP_W-1:0]  exp;
    logic [FRAC_W-1:0] frac;
  } fp_t;

  localparam logic signed [EW-1:0] BIAS    = EW'((1 << (EXP_W - 1)) - 1);
  localparam logic signed [EW-1:0] EXP_MAX = EW'((1 << EXP_W) - 1);

  localparam fp_t QNAN = '{sign: 1'b0, exp: '1, frac: {1'b1, {(FRAC_W-1){1'b0}}}};

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_OUT} state_t;

  // Unpack and classify
  function automatic fp_class_t classify(input logic [EXP_W-1:0]  e,
                                         input logic [FRAC_W-1:0] f);
    if (e == '0)      return FP_ZERO;
    else if (e == '1) return (f == '0) ? FP_INF : FP_NAN;
    else              return FP_NORMAL;
  endfunction

  fp_t        fa, fb;
  fp_class_t  ca, cb;
  logic       accept;

  assign fa     = a;
  assign fb     = b;
  assign ca     = classify(fa.exp, fa.frac);
  assign cb     = classify(fb.exp, fb.frac);
  assign accept = in_valid && in_ready;

  // Special-operand result, decided at accept time
  fp_special_t special_in;

  always_comb begin
    if (ca == FP_NAN || cb == FP_NAN ||
        (ca == FP_ZERO && cb == FP_ZERO) || (ca == FP_INF && cb == FP_INF))
      special_in = SP_NAN;
    else if (ca == FP_INF || cb == FP_ZERO)
      special_in = SP_INF;
    else if (ca == FP_ZERO || cb == FP_INF)
      special_in = SP_ZERO;
    else
      special_in = SP_NONE;
  end

  // Registers of the operation in flight
  state_t                state;
  logic                  sign_q;
  logic signed [EW-1:0]  exp_q;
  fp_special_t           special_q;
  fp_t                   result_c;

  // Significand divider
  logic           core_busy, core_done, core_sticky;
  logic [QW-1:0]  core_quot;

  srt_mant_div #(.MANT_W(MANT_W)) u_core (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (accept),
    .x      ({1'b1, fa.frac}),
    .y      ({1'b1, fb.frac}),
    .busy   (core_busy),
    .done   (core_done),
    .quot   (core_quot),
    .sticky (core_sticky)
  );

  // Normalise, round to nearest even, pack
  logic [QW-1:0]         qn;
  logic                  x_ge_y;
  logic [MANT_W-1:0]     mant;
  logic                  guard, sticky, round_up;
  logic [MANT_W:0]       mant_r;
  logic signed [EW-1:0]  exp_n, exp_r;
  fp_t                   rounded;

  always_comb begin
    x_ge_y   = core_quot[QW-2];
    qn       = x_ge_y ? core_quot : core_quot << 1;
    mant     = qn[QW-2 -: MANT_W];
    guard    = qn[QW-2-MANT_W];
    sticky   = (|qn[QW-3-MANT_W:0]) || core_sticky;
    round_up = guard && (sticky || mant[0]);
    // A quotient of two normal significands is never within half an ulp of
    // 2, so the carry out of this increment stays 0; it is handled anyway.
    mant_r   = {1'b0, mant} + (MANT_W+1)'(round_up);
    exp_n    = x_ge_y ? exp_q : exp_q - EW'(1);
    exp_r    = mant_r[MANT_W] ? exp_n + EW'(1) : exp_n;

    rounded.sign = sign_q;
    if (exp_r >= EXP_MAX) begin                      // overflow: infinity
      rounded.exp  = '1;
      rounded.frac = '0;
    end else if (exp_r <= 0) begin                   // underflow: flush to zero
      rounded.exp  = '0;
      rounded.frac = '0;
    end else begin
      rounded.exp  = exp_r[EXP_W-1:0];
      rounded.frac = mant_r[MANT_W] ? mant_r[MANT_W-1:1] : mant_r[FRAC_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      sign_q        <= 1'b0;
      exp_q         <= '0;
      special_q     <= SP_NONE;
    end else begin
      unique case (state)
        S_IDLE: if (accept) begin
          state         <= S_DIV;
          sign_q        <= fa.sign ^ fb.sign;
          exp_q         <= EW'(fa.exp) - EW'(fb.exp) + BIAS;
          special_q     <= special_in;
        end
        S_DIV: if (core_done) state <= out_ready ? S_IDLE : S_OUT;
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT) || (state == S_DIV && core_done);
  // The core holds its quotient and remainder until the next start, so the
  // result is formed from registers and stays stable while out_valid is high.
  always_comb begin
    unique case (special_q)
      SP_NAN:  result_c = QNAN;
      SP_INF:  result_c = '{sign: sign_q, exp: '1, frac: '0};
      SP_ZERO: result_c = '{sign: sign_q, exp: '0, frac: '0};
      default: result_c = rounded;
    endcase
  end

  assign result    = result_c;

  // The core is idle whenever a new operand pair can be accepted.
  a_core_idle: assert property (@(posedge clk) disable iff (!rst_n)
      in_ready |-> !core_busy)
    else $error("fp_div64: operands offered while the core is busy");

  // A held result must not change before it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(result))
    else $error("fp_div64: result changed while waiting for out_ready");

endmodule
