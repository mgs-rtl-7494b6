// fixed_to_fp32: normalize and round a signed fixed-point sum to IEEE-754
// binary32 (combinational).
//
// x is a WIDE-bit two's-complement number with FRAC fraction bits. Its
// magnitude is taken, the leading one found by a priority encoder, and the
// magnitude shifted so that the leading one becomes the hidden bit. When more
// than 24 significant bits exist the dropped bits are rounded to nearest, ties
// to even; a carry out of the rounding increments the exponent. Zero gives +0.
// For WIDE <= 64 and FRAC <= 100 every input is a normal binary32 number.
//
// From the paper: the final normalize + round of the wide accumulator to FP32.
// Chosen here: the fixed-point input format and round-to-nearest-even.
module fixed_to_fp32 #(
  parameter int unsigned WIDE = 32,
  parameter int unsigned FRAC = 10
) (
  input  logic signed [WIDE-1:0] x,
  output logic [31:0]            y
);

  logic [WIDE:0]   mag;
  int              lead;
  logic [WIDE+23:0] norm;     // magnitude with the leading one at bit WIDE+23
  logic [23:0]     sig;       // hidden bit + 23 mantissa bits before rounding
  logic            guard;
  logic            sticky;
  logic [24:0]     sig_r;
  logic [7:0]      exp_b;

  always_comb begin
    mag  = x[WIDE-1] ? (WIDE+1)'(-{x[WIDE-1], x}) : (WIDE+1)'({1'b0, x});
    lead = 0;
    for (int i = 0; i <= WIDE; i++) begin
      if (mag[i]) lead = i;
    end
    norm   = (WIDE+24)'(mag) << (WIDE + 23 - lead);
    sig    = norm[WIDE+23 -: 24];
    guard  = (WIDE >= 1) ? norm[WIDE-1] : 1'b0;
    sticky = |(norm & (((WIDE+24)'(1) << (WIDE-1)) - 1'b1));
    sig_r  = {1'b0, sig} + 25'(guard && (sticky || sig[0]));
    exp_b  = 8'(lead + 127 - int'(FRAC)) + 8'(sig_r[24]);
    if (mag == '0) begin
      y = '0;
    end else begin
      y = {x[WIDE-1], exp_b, sig_r[24] ? sig_r[23:1] : sig_r[22:0]};
    end
  end

endmodule
