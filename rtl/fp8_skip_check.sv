// fp8_skip_check: subnormal gating for the FP8 dMAC (combinational).
//
// Flags an operand pair whose product is certain to be zero after rounding to
// E4M3, so that the dMAC does not load the product register or touch the
// narrow accumulators for it. A finite E4M3 value with exponent field e has
// magnitude of at most 15 * 2^(e-10) if e >= 1 (1.111b * 2^(e-7)) and at most
// 7 * 2^-9 if e == 0 (subnormal). With E = max(ea,1) + max(eb,1) the largest
// possible product is therefore 225 * 2^(E-20) when both are normal, below
// 2^-9 (the smallest subnormal, under which the product rounds to zero) for
// E <= 3; 105 * 2^(E-20) with one subnormal operand, below 2^-9 for E <= 4;
// and 49 * 2^-18 with two, always below 2^-9. The test is exact: every pair of
// exponents not skipped has mantissas whose product survives. A zero operand
// (exponent and mantissa 0) is skipped too.
//
// From the paper: the check works on the input exponents, and a product below
// 2^-9 counts as zero. Chosen here: the threshold derived above and the
// inclusion of zero operands.
module fp8_skip_check
  import mgs_pkg::*;
(
  input  e4m3_t a,
  input  e4m3_t b,
  output logic  skip
);

  logic [4:0] e_sum;

  always_comb begin
    e_sum = 5'(fp8_shift_amount(a.exp)) + 5'(fp8_shift_amount(b.exp));
    skip  = (e_sum <= 5'd3)
         || (e_sum == 5'd4 && (a.exp == 4'd0 || b.exp == 4'd0))
         || (a.exp == 4'd0 && a.man == 3'd0)
         || (b.exp == 4'd0 && b.man == 3'd0);
  end

endmodule
