// exp_acc_bank: the exponent-indexed narrow accumulators of the FP8 dMAC.
//
// N_EXP registers of NARROW signed bits, one per product exponent, share one
// NARROW-bit adder. The exponent field selects a register (the exponent
// demultiplexer), so only significands of equal weight are ever added and no
// alignment shift is needed. Operations, one per cycle:
//   BANK_ACC   reg[idx] + mant. Without overflow the sum is written back. On a
//              signed overflow the old reg[idx] is handed out (spill_valid,
//              spill_val) for the wide accumulator and mant is written into
//              reg[idx].
//   BANK_FLUSH reg[idx] is handed out and cleared (end of a dot product).
//   BANK_IDLE  nothing changes.
// spill_valid and spill_val are combinational outputs of the current
// operation; the register update happens on the next rising edge.
// rst_n (active low, synchronous) clears all registers.
//
// From the paper: 16 five-bit registers indexed by the 4-bit exponent, the
// narrow adder with its overflow flag, and the rule that on overflow the
// register goes to the wide accumulator and the new value replaces it. Chosen
// here: the single shared adder behind a read multiplexer (the figure's
// layout), the operation encoding and the flush port.
module exp_acc_bank
  import mgs_pkg::*;
#(
  parameter int unsigned N_EXP  = 16,
  parameter int unsigned NARROW = 5
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  bank_op_e                   op,
  input  logic [$clog2(N_EXP)-1:0]   idx,
  input  logic signed [NARROW-1:0]   mant,
  output logic                       oflow,
  output logic                       spill_valid,
  output logic signed [NARROW-1:0]   spill_val
);

  logic signed [NARROW-1:0] regs [N_EXP];
  logic signed [NARROW-1:0] cur;
  logic signed [NARROW-1:0] sum;

  always_comb begin
    cur         = regs[idx];
    sum         = cur + mant;
    oflow       = (op == BANK_ACC) && (cur[NARROW-1] == mant[NARROW-1])
                  && (sum[NARROW-1] != cur[NARROW-1]);
    spill_valid = oflow || (op == BANK_FLUSH);
    spill_val   = cur;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_EXP; i++) regs[i] <= '0;
    end else begin
      unique case (op)
        BANK_ACC:   regs[idx] <= oflow ? mant : sum;
        BANK_FLUSH: regs[idx] <= '0;
        default:    ;
      endcase
    end
  end

endmodule
