// fp8_dmac: FP8 (E4M3) dual-accumulator MAC unit with subnormal gating.
//
// Dataflow, one operand pair per cycle:
//   1. Multiply stage. fp8_mul forms the E4M3 product of weight and act,
//      rounded back to E4M3. fp8_skip_check flags pairs whose product is
//      certainly zero; for those (when SKIP_EN) the product register is not
//      loaded and no accumulation happens.
//   2. Narrow stage. The product's sign turns its 4-bit significand into a
//      5-bit two's-complement mantissa, which is added into one of 16 narrow
//      registers chosen by the product exponent (exp_acc_bank). On a narrow
//      overflow the old register value is left-shifted by its exponent and
//      added into the 32-bit wide accumulator (shift_wide_acc) in the same
//      cycle, and the new mantissa replaces it.
//   3. Flush. After the pair flagged in_last has passed stage 2, the
//      controller spends 16 cycles (ST_FLUSH) moving each narrow register,
//      shifted by its exponent, into the wide accumulator, reusing the one
//      shifter and wide adder.
//   4. Normalize (ST_NORM). fixed_to_fp32 rounds the wide fixed-point sum to
//      FP32; out_valid pulses for one cycle with out_fp32, and the wide
//      accumulator is cleared for the next dot product.
//
// Interface: a pair is taken on a rising edge where in_valid && in_ready.
// in_ready falls once the last pair of a dot product is taken and rises again
// in the cycle in which out_valid is high, so a new dot product waits (stalls) for the
// flush. out_valid comes FLUSH_LATENCY = 18 rising edges after the edge that
// took the last pair. Status pulses: oflow (a narrow overflow spilled into the
// wide accumulator) and skipped (a pair was gated). rst_n is active low,
// synchronous.
//
// From the paper: E4M3 operands, multiply then round to FP8, 5-bit narrow
// adder, 16 registers indexed by exponent, spill with left shift on overflow,
// the 16x shift+add at the end, FP32 normalize + round, and skipping of
// products below the subnormal range. Chosen here: the two-stage pipeline, the
// ready/valid handshake with a last flag, one flush step per cycle, the
// fixed-point grid of the wide accumulator and stalling during the flush.
module fp8_dmac
  import mgs_pkg::*;
#(
  parameter int unsigned NARROW  = 5,
  parameter int unsigned WIDE    = 32,
  parameter int unsigned N_EXP   = 16,
  parameter bit          SKIP_EN = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  e4m3_t       weight,
  input  e4m3_t       act,
  input  logic        in_last,
  output logic        out_valid,
  output logic [31:0] out_fp32,
  output logic        oflow,
  output logic        skipped
);

  localparam int unsigned IDX_BITS = $clog2(N_EXP);

  if (N_EXP != 16 || NARROW < 5) begin : g_bad_cfg
    $error("fp8_dmac: E4M3 needs 16 exponent registers of at least 5 bits");
  end

  fp8_state_e           state;
  logic [IDX_BITS-1:0]  flush_idx;

  // ---------------- multiply stage ----------------
  e4m3_t prod_c;
  logic  skip_c;
  logic  fire;

  fp8_mul u_mul (.a(weight), .b(act), .p(prod_c));
  fp8_skip_check u_skip (.a(weight), .b(act), .skip(skip_c));

  e4m3_t pr;            // product register
  logic  pr_acc;        // pr holds a product to accumulate
  logic  pr_last;       // the last pair of the dot product is in stage 2

  assign in_ready = (state == ST_ACC) && !pr_last;
  assign fire     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pr      <= '0;
      pr_acc  <= 1'b0;
      pr_last <= 1'b0;
    end else begin
      pr_acc  <= fire && !(SKIP_EN && skip_c);
      pr_last <= fire && in_last;
      if (fire && !(SKIP_EN && skip_c)) pr <= prod_c;
    end
  end

  assign skipped = fire && SKIP_EN && skip_c;

  // ---------------- narrow stage ----------------
  bank_op_e                bank_op;
  logic [IDX_BITS-1:0]     bank_idx;
  logic signed [NARROW-1:0] mant;
  logic                    bank_oflow;
  logic                    spill_valid;
  logic signed [NARROW-1:0] spill_val;

  always_comb begin
    mant = pr.sign ? -NARROW'({pr.exp != 4'd0, pr.man}) : NARROW'({pr.exp != 4'd0, pr.man});
    if (state == ST_FLUSH) begin
      bank_op  = BANK_FLUSH;
      bank_idx = flush_idx;
    end else if (state == ST_ACC && pr_acc) begin
      bank_op  = BANK_ACC;
      bank_idx = IDX_BITS'(pr.exp);
    end else begin
      bank_op  = BANK_IDLE;
      bank_idx = IDX_BITS'(pr.exp);
    end
  end

  exp_acc_bank #(.N_EXP(N_EXP), .NARROW(NARROW)) u_bank (
    .clk, .rst_n,
    .op          (bank_op),
    .idx         (bank_idx),
    .mant        (mant),
    .oflow       (bank_oflow),
    .spill_valid (spill_valid),
    .spill_val   (spill_val)
  );

  assign oflow = bank_oflow;

  // ---------------- wide accumulator ----------------
  logic signed [WIDE-1:0] wide_acc;

  shift_wide_acc #(.NARROW(NARROW), .WIDE(WIDE)) u_wide (
    .clk, .rst_n,
    .clear  (state == ST_NORM),
    .add_en (spill_valid),
    .val    (spill_val),
    .exp    (4'(bank_idx)),
    .acc    (wide_acc)
  );

  // ---------------- normalize + round ----------------
  logic [31:0] fp32_c;

  fixed_to_fp32 #(.WIDE(WIDE), .FRAC(FIXED_FRAC)) u_norm (.x(wide_acc), .y(fp32_c));

  // ---------------- controller ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= ST_ACC;
      flush_idx <= '0;
      out_valid <= 1'b0;
      out_fp32  <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        ST_ACC: begin
          if (pr_last) begin
            state     <= ST_FLUSH;
            flush_idx <= '0;
          end
        end
        ST_FLUSH: begin
          flush_idx <= flush_idx + 1'b1;
          if (flush_idx == IDX_BITS'(N_EXP - 1)) state <= ST_NORM;
        end
        ST_NORM: begin
          out_fp32  <= fp32_c;
          out_valid <= 1'b1;
          state     <= ST_ACC;
        end
        default: state <= ST_ACC;
      endcase
    end
  end

  // The last pair blocks new input until the result is out.
  a_no_input_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (state != ST_ACC) |-> !fire);

endmodule
