// shift_wide_acc: left shifter and wide accumulator of the FP8 dMAC.
//
// When add_en is high, the signed narrow value val is sign-extended, shifted
// left by its exponent (fp8_shift_amount(exp): the exponent field, or 1 for the
// subnormal field 0) and added into the WIDE-bit register acc on the next
// rising edge. The shift puts values of every exponent on one fixed-point grid
// (LSB = 2^-10), so they can be added without alignment error. clear (sync)
// zeroes acc first; clear and add_en together load the shifted value. The
// register only changes when add_en or clear is high, the condition under
// which its clock can be gated. The sum wraps if it leaves the WIDE-bit range.
//
// From the paper: the shift by the exponent, one 32-bit wide register and its
// adder. Chosen here: the fixed-point grid, the subnormal shift of 1, clear.
module shift_wide_acc
  import mgs_pkg::*;
#(
  parameter int unsigned NARROW = 5,
  parameter int unsigned WIDE   = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     add_en,
  input  logic signed [NARROW-1:0] val,
  input  logic [3:0]               exp,
  output logic signed [WIDE-1:0]   acc
);

  logic signed [WIDE-1:0] shifted;

  always_comb begin
    shifted = WIDE'(val) <<< fp8_shift_amount(exp);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (clear || add_en) begin
      acc <= (clear ? '0 : acc) + (add_en ? shifted : '0);
    end
  end

endmodule
