// tb_fp8_mul: exhaustive check of the E4M3 multiplier. All 65536 operand pairs
// (pairs with a NaN operand excluded) are applied; the output is decoded and
// compared with the exact product rounded by the real-number reference
// (flush below 2^-9, nearest-even, saturation at 448). A zero result must be
// +0, and the output must never be NaN.
module tb_fp8_mul;
  import mgs_pkg::*;
  import tb_fp8_ref_pkg::*;

  e4m3_t a, b, p;
  int checks = 0, failures = 0;
  int n_sub = 0, n_sat = 0, n_flush = 0;

  fp8_mul dut (.a(a), .b(b), .p(p));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real exact, expv, got;
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        if (is_nan(8'(i)) || is_nan(8'(j))) continue;
        a = e4m3_t'(8'(i)); b = e4m3_t'(8'(j));
        #1;
        exact = e4m3_val(8'(i)) * e4m3_val(8'(j));
        expv  = round_e4m3(exact);
        got   = e4m3_val(p);
        checks++;
        if (got != expv || is_nan(p) || (expv == 0.0 && p != 8'h00)) begin
          failures++;
          if (failures < 10) $display("FAIL %h*%h got %h (%f) exp %f", i, j, p, got, expv);
        end
        if (exact != 0.0 && expv == 0.0) n_flush++;
        if (p.exp == 0 && p.man != 0) n_sub++;
        if (expv == 448.0 || expv == -448.0) n_sat++;
      end
    end
    checks++;
    if (n_sub == 0 || n_sat == 0 || n_flush == 0) failures++;
    $display("subnormal=%0d saturated=%0d flushed=%0d", n_sub, n_sat, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
