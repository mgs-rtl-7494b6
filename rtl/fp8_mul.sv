// fp8_mul: E4M3 x E4M3 multiplier with the product normalized and rounded back
// to E4M3 (combinational).
//
// The two 4-bit significands {hidden bit, mantissa} are multiplied into an
// 8-bit integer. With E = max(ea,1) + max(eb,1) the exact product is
// prod * 2^(E-20). The leading one of prod sets the result exponent; the
// product is shifted right by rs = max(lead-3, 11-E) so that 4 significant bits
// remain (or, in the subnormal range, so that the grid is 2^-9), and the
// dropped bits are rounded to nearest, ties to even. A carry out of the
// rounding bumps the exponent. Products whose magnitude is below 2^-9, the
// smallest E4M3 subnormal, are returned as zero, which is how the paper counts
// them ("round to zero, i.e. |w*x| < 2^-9"); this makes the result exactly zero
// in every case the subnormal-gating check skips. Products above 448 saturate
// to +-448. A zero result has sign 0.
//
// From the paper: the FP8 multiply followed by FP8 normalize + round, producing
// a sign, a 4-bit exponent and a 4-bit significand with leading one. Chosen
// here: round-to-nearest-even, saturation on overflow, no NaN handling.
module fp8_mul
  import mgs_pkg::*;
(
  input  e4m3_t a,
  input  e4m3_t b,
  output e4m3_t p
);

  logic [3:0]  sig_a, sig_b;
  logic [4:0]  e_sum;          // max(ea,1) + max(eb,1), 2..30
  logic [7:0]  prod;
  logic [2:0]  lead;           // position of the leading one of prod
  logic signed [6:0] rs;       // right shift of prod
  logic signed [6:0] eb;       // biased exponent of the normalized product
  logic [15:0] kept;
  logic [15:0] rem;
  logic [15:0] half;
  logic [4:0]  q;              // rounded significand, up to 16
  logic        round_up;
  logic        tiny;
  logic signed [6:0] e_out;

  always_comb begin
    sig_a = {a.exp != 4'd0, a.man};
    sig_b = {b.exp != 4'd0, b.man};
    e_sum = 5'(fp8_shift_amount(a.exp)) + 5'(fp8_shift_amount(b.exp));
    prod  = sig_a * sig_b;

    lead = '0;
    for (int i = 0; i < 8; i++) begin
      if (prod[i]) lead = 3'(i);
    end

    eb = 7'(signed'({4'b0, lead})) + 7'(signed'({2'b0, e_sum})) - 7'sd13;
    rs = 7'(signed'({4'b0, lead})) - 7'sd3;
    if (eb < 7'sd1) rs = 7'sd11 - 7'(signed'({2'b0, e_sum}));

    kept = '0; rem = '0; half = '0;
    if (rs <= 0) begin
      kept = 16'(prod) << (-rs);
    end else begin
      kept = 16'(prod) >> rs;
      rem  = 16'(prod) & ((16'd1 << rs) - 16'd1);
      half = 16'd1 << (rs - 1);
    end
    round_up = (rs > 0) && ((rem > half) || ((rem == half) && kept[0]));
    q        = 5'(kept) + 5'(round_up);
    // Below the smallest subnormal: the whole product fits under 2^rs with rs = 11-E.
    tiny     = (eb < 7'sd1) && (rs > 7'sd0) && (16'(prod) < (16'd1 << rs));

    if (eb >= 7'sd1) begin
      e_out = eb + ((q == 5'd16) ? 7'sd1 : 7'sd0);
    end else begin
      e_out = q[3] ? 7'sd1 : 7'sd0;   // a subnormal that rounds up to 1.000 * 2^-6
    end

    p.sign = a.sign ^ b.sign;
    p.exp  = e_out[3:0];
    p.man  = (q == 5'd16) ? 3'd0 : q[2:0];
    if (prod == 8'd0 || tiny) begin
      p = '0;
    end else if (e_out > 7'sd15 || (e_out == 7'sd15 && p.man == 3'd7)) begin
      p.exp = 4'd15;
      p.man = 3'd6;
    end
  end

endmodule
