// fp_pkg: operand classes and special results of the IEEE-754 binary
// floating-point divider.
//
// Subnormal operands are read as zeros of the same sign (flush to zero), so
// a number is a zero, a normal number, an infinity or a NaN.
package fp_pkg;

  typedef enum logic [1:0] {
    FP_ZERO,
    FP_NORMAL,
    FP_INF,
    FP_NAN
  } fp_class_t;

  // Result forced by special operands, decided when the operands are taken.
  typedef enum logic [1:0] {
    SP_NONE,       // normal operands: result from the significand divider
    SP_NAN,        // quiet NaN
    SP_INF,        // signed infinity
    SP_ZERO        // signed zero
  } fp_special_t;

endpackage
