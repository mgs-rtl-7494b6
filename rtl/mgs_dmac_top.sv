// mgs_dmac_top: one integer dMAC and one FP8 dMAC side by side.
//
// The two units are independent, as they are two separate designs of the same
// idea (narrow accumulation with a wide fallback on overflow); they share only
// clock and reset. Each unit's ports are brought out with an int_ or fp_
// prefix; see int_dmac and fp8_dmac for the protocols and timing.
//
// The pairing of both units under one top is this design's choice; the units
// themselves and their default sizes (4-bit integer operands with 8/32-bit
// accumulators; E4M3 operands with 16 five-bit narrow registers, a 32-bit wide
// accumulator and subnormal gating) follow the paper.
module mgs_dmac_top
  import mgs_pkg::*;
#(
  parameter int unsigned INT_W_BITS = 4,
  parameter int unsigned INT_A_BITS = 4,
  parameter int unsigned INT_NARROW = 8,
  parameter int unsigned INT_WIDE   = 32,
  parameter int unsigned FP_NARROW  = 5,
  parameter int unsigned FP_WIDE    = 32,
  parameter bit          FP_SKIP_EN = 1'b1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // integer dMAC
  input  logic                         int_in_valid,
  input  logic signed [INT_W_BITS-1:0] int_weight,
  input  logic signed [INT_A_BITS-1:0] int_act,
  input  logic                         int_done,
  output logic                         int_out_valid,
  output logic signed [INT_WIDE-1:0]   int_out,
  output logic                         int_oflow,
  // FP8 dMAC
  input  logic                         fp_in_valid,
  output logic                         fp_in_ready,
  input  e4m3_t                        fp_weight,
  input  e4m3_t                        fp_act,
  input  logic                         fp_in_last,
  output logic                         fp_out_valid,
  output logic [31:0]                  fp_out_fp32,
  output logic                         fp_oflow,
  output logic                         fp_skipped
);

  int_dmac #(
    .W_BITS(INT_W_BITS), .A_BITS(INT_A_BITS), .NARROW(INT_NARROW), .WIDE(INT_WIDE)
  ) u_int (
    .clk, .rst_n,
    .in_valid  (int_in_valid),
    .weight    (int_weight),
    .act       (int_act),
    .done      (int_done),
    .out_valid (int_out_valid),
    .out       (int_out),
    .oflow     (int_oflow)
  );

  fp8_dmac #(
    .NARROW(FP_NARROW), .WIDE(FP_WIDE), .N_EXP(16), .SKIP_EN(FP_SKIP_EN)
  ) u_fp8 (
    .clk, .rst_n,
    .in_valid  (fp_in_valid),
    .in_ready  (fp_in_ready),
    .weight    (fp_weight),
    .act       (fp_act),
    .in_last   (fp_in_last),
    .out_valid (fp_out_valid),
    .out_fp32  (fp_out_fp32),
    .oflow     (fp_oflow),
    .skipped   (fp_skipped)
  );

endmodule
