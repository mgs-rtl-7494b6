// tb_fp8_skip_check: exhaustive check of the subnormal-gating test. For all
// 65536 operand pairs (NaN excluded): a skipped pair must have an exact product
// below 2^-9, so that it rounds to zero; a pair that is not skipped and has no
// zero operand must have exponents for which some mantissas give a product of
// at least 2^-9 (the test is as tight as an exponent-only test can be); a zero
// operand must always be skipped.
module tb_fp8_skip_check;
  import mgs_pkg::*;
  import tb_fp8_ref_pkg::*;

  e4m3_t a, b;
  logic skip;
  int checks = 0, failures = 0, n_skip = 0;

  fp8_skip_check dut (.a(a), .b(b), .skip(skip));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pr;
    bit zero_op;
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        if (is_nan(8'(i)) || is_nan(8'(j))) continue;
        a = e4m3_t'(8'(i)); b = e4m3_t'(8'(j));
        #1;
        pr = e4m3_val(8'(i)) * e4m3_val(8'(j));
        if (pr < 0.0) pr = -pr;
        zero_op = (e4m3_val(8'(i)) == 0.0) || (e4m3_val(8'(j)) == 0.0);
        checks++;
        if (skip && pr >= 2.0 ** -9) begin
          failures++; $display("FAIL %h*%h skipped, product %f", i, j, pr);
        end
        if (!skip && !zero_op && max_prod_for_exps(a.exp, b.exp) < 2.0 ** -9) begin
          failures++; $display("FAIL %h*%h not skipped though always below 2^-9", i, j);
        end
        if (zero_op && !skip) begin
          failures++; $display("FAIL %h*%h zero operand not skipped", i, j);
        end
        if (skip) n_skip++;
      end
    end
    $display("skipped pairs=%0d", n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
