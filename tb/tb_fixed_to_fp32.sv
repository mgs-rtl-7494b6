// tb_fixed_to_fp32: converts random 32-bit fixed-point values (2^-10 LSB) of
// every magnitude, plus edge cases (0, +-1 LSB, extremes, values one bit past
// 24 significant bits to hit ties), and compares the decoded binary32 output
// with the exact value rounded to nearest-even by the real-number reference.
module tb_fixed_to_fp32;
  import tb_fp8_ref_pkg::*;
  localparam int WID = 32, FRAC = 10;

  logic signed [WID-1:0] x;
  logic [31:0] y;
  int checks = 0, failures = 0;

  fixed_to_fp32 #(.WIDE(WID), .FRAC(FRAC)) dut (.x(x), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic signed [WID-1:0] v);
    real expv;
    x = v;
    #1;
    expv = round_fp32(real'(v) * (2.0 ** -FRAC));
    checks++;
    if (fp32_val(y) != expv || (v == 0 && y != 32'd0)) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d got %h exp %f", v, y, expv);
    end
  endtask

  initial begin
    check(0); check(1); check(-1); check(32'h7fffffff); check(32'sh80000000);
    check(32'h01000001); check(32'h01000003); check(32'h02000002); check(32'h02000006);
    check(-32'sh01000001); check(-32'sh01000003); check(32'h00ffffff); check(32'h01ffffff);
    for (int k = 0; k < 20000; k++) begin
      check(WID'($urandom) >>> $urandom_range(0, 31));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
