// int_dmac: integer dual-accumulator multiply-accumulate unit (output stationary).
//
// Each cycle a signed weight and activation may arrive (in_valid). Their product
// is registered in p. The next cycle p is added into the narrow accumulator a8
// by a NARROW-bit adder. When that addition overflows the signed NARROW-bit
// range, the old a8 is added into the wide accumulator a32 by the WIDE-bit
// adder instead, and p is written into a8. The wide register only changes on an
// overflow or at the end of a dot product; this enable is the condition under
// which the wide accumulator's clock is gated, and synthesis can map it to a
// clock-gating cell.
//
// done ends a dot product. It is raised for one cycle after the last pair; that
// cycle may already carry the first pair of the next dot product. Two clock
// edges after done is sampled, out_valid is high for one cycle with
// out = a32 + a8 (the complete dot product); in all other cycles out is 0, as
// the figure's GND input of the output mux. The accumulators restart from that
// next pair, so dot products can follow back to back at one pair per cycle.
//
// Interface: in_valid/weight/act/done are sampled on the rising clock edge;
// oflow is a one-cycle pulse for every narrow overflow (spill to a32), useful to
// measure how often the wide adder is used. rst_n is an active-low synchronous
// reset.
//
// From the paper: 4-bit operands, an 8-bit narrow and a 32-bit wide adder, the
// spill-on-overflow rule, the mux that feeds a8 or 0 to the wide adder when
// oflow or done, and out = a8 + a32 on done. Chosen here: signed operands, the
// registered product and output, signed overflow detection, the handshake of
// done, and wraparound of the wide accumulator.
module int_dmac #(
  parameter int unsigned W_BITS = 4,
  parameter int unsigned A_BITS = 4,
  parameter int unsigned NARROW = 8,
  parameter int unsigned WIDE   = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [W_BITS-1:0] weight,
  input  logic signed [A_BITS-1:0] act,
  input  logic                     done,
  output logic                     out_valid,
  output logic signed [WIDE-1:0]   out,
  output logic                     oflow
);

  localparam int unsigned P_BITS = W_BITS + A_BITS;

  // The product is written whole into the narrow accumulator on overflow.
  if (NARROW < P_BITS) begin : g_bad_width
    $error("int_dmac: NARROW must hold a full product (W_BITS + A_BITS bits)");
  end

  // Multiplier and product register p.
  logic signed [NARROW-1:0] p;
  logic                     p_valid;
  logic                     p_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p       <= '0;
      p_valid <= 1'b0;
      p_done  <= 1'b0;
    end else begin
      p_valid <= in_valid;
      p_done  <= done;
      if (in_valid) p <= NARROW'(weight * act);
    end
  end

  // Narrow adder with signed overflow flag.
  logic signed [NARROW-1:0] a8;
  logic signed [NARROW-1:0] a8_sum;
  logic                     add_oflow;

  always_comb begin
    a8_sum    = a8 + p;
    add_oflow = p_valid && (a8[NARROW-1] == p[NARROW-1]) && (a8_sum[NARROW-1] != a8[NARROW-1]);
  end

  // Wide adder: a32 + (oflow | done ? a8 : 0).
  logic signed [WIDE-1:0] a32;
  logic signed [WIDE-1:0] wide_in;
  logic signed [WIDE-1:0] wide_sum;
  logic                   wide_en;

  always_comb begin
    wide_en  = add_oflow || p_done;
    wide_in  = wide_en ? WIDE'(a8) : '0;
    wide_sum = a32 + wide_in;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a8        <= '0;
      a32       <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= p_done;
      out       <= p_done ? wide_sum : '0;
      if (p_done) begin
        // End of dot product: restart both accumulators from the new pair.
        a8  <= p_valid ? p : '0;
        a32 <= '0;
      end else if (add_oflow) begin
        a8  <= p;
        a32 <= wide_sum;
      end else if (p_valid) begin
        a8  <= a8_sum;
      end
    end
  end

  assign oflow = add_oflow && !p_done;

endmodule
