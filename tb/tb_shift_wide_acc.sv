// tb_shift_wide_acc: random adds of 5-bit signed values with random exponent
// fields into the 32-bit wide accumulator, with occasional clears. The
// reference multiplies by 2^max(e,1) in 64-bit integers and wraps to 32 bits.
// The register must also hold its value in cycles with neither add nor clear.
module tb_shift_wide_acc;
  localparam int NAR = 5, WID = 32;

  logic clk = 0, rst_n = 0, clear = 0, add_en = 0;
  logic signed [NAR-1:0] val = 0;
  logic [3:0] exp = 0;
  logic signed [WID-1:0] acc;
  longint ref_acc = 0;
  int checks = 0, failures = 0;

  shift_wide_acc #(.NARROW(NAR), .WIDE(WID)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, e;
    bit c, a;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      v = $urandom_range(0, 31) - 16;
      e = $urandom_range(0, 15);
      c = ($urandom_range(0, 199) == 0);
      a = ($urandom_range(0, 3) != 0);
      val = NAR'(v); exp = 4'(e); clear = c; add_en = a;
      if (c) ref_acc = 0;
      if (a) ref_acc = ref_acc + longint'(v) * (longint'(1) << ((e == 0) ? 1 : e));
      ref_acc = longint'(signed'(32'(ref_acc)));
      @(posedge clk); #1;
      checks++;
      if (acc !== WID'(ref_acc)) begin
        failures++; $display("FAIL acc got %0d exp %0d", acc, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
