// tb_workload_int: integer dMAC on the operand statistics used to analyse MGS
// overflows: 5-bit weights N(0,5) clipped to [-15,15] times 7-bit activations
// N(0,21) clipped to [-63,63] (12-bit products), over dot products of length
// 1280, 1536 and 4608. Two instances run the same stream, with 12-bit and
// 16-bit narrow accumulators (both 32-bit wide), inside the 8-20 bit
// accumulator range swept for integer MGS. All data is generated here.
//
// Checks per dot product and instance: the exact integer result, and the
// number of narrow overflows against an integer model of the narrow
// accumulator. Over the run the 12-bit instance must overflow at least once.
// Printed: average number of sums per overflow.
module tb_workload_int;
  localparam int W = 5, A = 7;

  logic clk = 0, rst_n = 0, in_valid = 0, done = 0;
  logic signed [W-1:0] weight = 0;
  logic signed [A-1:0] act = 0;
  logic ov12, ov16, of12, of16;
  logic signed [31:0] out12, out16;

  int_dmac #(.W_BITS(W), .A_BITS(A), .NARROW(12), .WIDE(32)) dut12 (
    .clk, .rst_n, .in_valid, .weight, .act, .done, .out_valid(ov12), .out(out12), .oflow(of12));
  int_dmac #(.W_BITS(W), .A_BITS(A), .NARROW(16), .WIDE(32)) dut16 (
    .clk, .rst_n, .in_valid, .weight, .act, .done, .out_valid(ov16), .out(out16), .oflow(of16));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n12 = 0, n16 = 0;

  initial begin
    #10000000;
    failures++;
    checks++;
    if (n12 == 0) begin failures++; $display("FAIL no 12-bit overflow in the run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (of12) n12++;
    if (of16) n16++;
  end

  function automatic int qgauss(real sigma, int lim);
    real u1, u2, g;
    int  v;
    u1 = (real'($urandom) + 1.0) / 4294967296.0;
    u2 = real'($urandom) / 4294967296.0;
    g  = sigma * $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    v  = int'(g);
    if (v > lim) v = lim;
    if (v < -lim) v = -lim;
    return v;
  endfunction

  // overflows of a narrow accumulator of nb bits
  function automatic int ref_oflows(int p[], int nb);
    int a = 0, n = 0, s;
    foreach (p[i]) begin
      s = a + p[i];
      if (s > (2 ** (nb - 1)) - 1 || s < -(2 ** (nb - 1))) begin n++; a = p[i]; end
      else a = s;
    end
    return n;
  endfunction

  task automatic run_dot(string name, int k);
    int p[];
    int w, x, sum = 0, b12, b16;
    p = new[k];
    b12 = n12; b16 = n16;
    for (int i = 0; i < k; i++) begin
      w = qgauss(5.0, 15); x = qgauss(21.0, 63);
      p[i] = w * x; sum += p[i];
      @(negedge clk);
      in_valid = 1; weight = W'(w); act = A'(x); done = 0;
    end
    @(negedge clk);
    in_valid = 0; done = 1;
    @(negedge clk);
    done = 0;
    @(negedge clk);
    checks += 5;
    if (!ov12 || !ov16) begin failures++; $display("FAIL %s out_valid", name); end
    if (out12 !== sum) begin failures++; $display("FAIL %s 12-bit result %0d exp %0d", name, out12, sum); end
    if (out16 !== sum) begin failures++; $display("FAIL %s 16-bit result %0d exp %0d", name, out16, sum); end
    if (n12 - b12 != ref_oflows(p, 12)) begin failures++; $display("FAIL %s 12-bit overflows", name); end
    if (n16 - b16 != ref_oflows(p, 16)) begin failures++; $display("FAIL %s 16-bit overflows", name); end
    $display("%s K=%0d: sum=%0d overflows 12-bit=%0d (%.1f sums each) 16-bit=%0d",
             name, k, sum, n12 - b12, real'(k) / real'(n12 - b12 + 1), n16 - b16);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      run_dot("MobileNetV2", 1280);
      run_dot("ViT-Small", 1536);
      run_dot("ResNet-18", 4608);
    end
    checks++;
    if (n12 == 0) begin failures++; $display("FAIL no 12-bit overflow in the run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
