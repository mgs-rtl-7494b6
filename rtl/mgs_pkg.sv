// mgs_pkg: types and constants shared by the dual-accumulator MAC (dMAC) units.
//
// The FP8 format is OCP E4M3: 1 sign bit, 4 exponent bits with bias 7, 3 stored
// mantissa bits. A value with exponent field E >= 1 is (-1)^s * 1.mmm * 2^(E-7);
// with E == 0 it is subnormal, (-1)^s * 0.mmm * 2^(1-7). The largest finite
// magnitude is 448 (E=15, m=110); S.1111.111 is NaN, which these units do not
// produce and do not expect at their inputs.
//
// The FP8 dMAC keeps its wide sum as a two's-complement fixed-point number whose
// least significant bit weighs 2^-10 (FIXED_FRAC). An E4M3 significand {h,mmm}
// (h = hidden bit) taken as a 4-bit integer weighs 2^(E-10) for E >= 1 and
// 2^(1-10) for E == 0, so it lands on that grid after a left shift by E
// (by 1 for E == 0); see fp8_shift_amount().
package mgs_pkg;

  localparam int unsigned FIXED_FRAC    = 10;   // LSB of the wide fixed-point sum = 2^-10

  typedef struct packed {
    logic       sign;
    logic [3:0] exp;
    logic [2:0] man;
  } e4m3_t;

  // Shift that puts a significand of exponent field e onto the 2^-10 grid.
  function automatic logic [3:0] fp8_shift_amount(input logic [3:0] e);
    return (e == 4'd0) ? 4'd1 : e;
  endfunction

  // Operations of the exponent-indexed narrow accumulator bank.
  typedef enum logic [1:0] {
    BANK_IDLE  = 2'd0,
    BANK_ACC   = 2'd1,   // add a signed mantissa into register [idx]
    BANK_FLUSH = 2'd2    // hand register [idx] to the wide accumulator and clear it
  } bank_op_e;

  // Controller states of the FP8 dMAC.
  typedef enum logic [1:0] {
    ST_ACC   = 2'd0,     // accept one product per cycle
    ST_FLUSH = 2'd1,     // 16 shift+add steps, one narrow register per cycle
    ST_NORM  = 2'd2      // normalize + round the wide sum to FP32
  } fp8_state_e;

endpackage
