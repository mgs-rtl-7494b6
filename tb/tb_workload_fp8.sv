// tb_workload_fp8: FP8 dMAC (default parameters) on dot products with the
// lengths and value statistics of the FP8 inference workloads MGS targets:
// K = 1280 (MobileNetV2 classifier), 1536 (ViT-Small MLP) and 4608 (ResNet-18
// 3x3x512 convolution), four dot products each. Weights are N(0, 0.1),
// activations half-normal (CNNs, after ReLU) or normal (ViT) with sigma 1,
// both rounded to E4M3; all data is generated here.
//
// Checks per dot product: the result equals the exact sum of the E4M3-rounded
// products rounded to binary32, and the latency is 18 edges. Over the run, the
// summed dMAC error against the unrounded dot products must be under half
// that of naive sequential FP8 accumulation (every partial sum rounded to
// E4M3), which swamps. Also printed: narrow overflows and average number of sums between
// overflows, skipped pairs.
module tb_workload_fp8;
  import mgs_pkg::*;
  import tb_fp8_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0, in_ready;
  e4m3_t weight = '0, act = '0;
  logic out_valid, oflow, skipped;
  logic [31:0] out_fp32;

  fp8_dmac dut (.*);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;
  int n_oflow = 0, n_skip = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    checks++;
    if (!(sum_e_dmac * 2.0 < sum_e_naive)) begin failures++; $display("FAIL dMAC error not well below naive FP8"); end
    $display("total |error|: dMAC=%f naive FP8=%f", sum_e_dmac, sum_e_naive);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (oflow) n_oflow++;
    if (skipped) n_skip++;
  end

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967296.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // E4M3 code of a value already on the E4M3 grid
  function automatic logic [7:0] encode(real v);
    real a = (v < 0.0) ? -v : v;
    int e, m;
    if (a == 0.0) return 8'h00;
    if (a < 2.0 ** -6) begin e = 0; m = int'(a / (2.0 ** -9)); end
    else begin e = flog2(a) + 7; m = int'(a / (2.0 ** (flog2(a) - 3))) - 8; end
    return {v < 0.0, 4'(e), 3'(m)};
  endfunction

  real w_v[], x_v[];
  real sum_e_dmac = 0.0, sum_e_naive = 0.0;

  task automatic run_dot(string name, int k, bit relu);
    real exact = 0.0, ref_sum = 0.0, naive = 0.0, got, e_dmac, e_naive, pr;
    int  t_last, t_out, ov0, sk0;
    w_v = new[k]; x_v = new[k];
    for (int i = 0; i < k; i++) begin
      real g;
      w_v[i] = round_e4m3(0.1 * gauss());
      g = gauss();
      if (relu && g < 0.0) g = -g;
      x_v[i] = round_e4m3(g);
      exact  += w_v[i] * x_v[i];
      pr      = round_e4m3(w_v[i] * x_v[i]);
      ref_sum += pr;
      naive   = round_e4m3(naive + pr);
    end
    ov0 = n_oflow; sk0 = n_skip;
    for (int i = 0; i < k; i++) begin
      @(negedge clk);
      in_valid = 1; weight = e4m3_t'(encode(w_v[i])); act = e4m3_t'(encode(x_v[i]));
      in_last = (i == k - 1);
      #1;
      if (!in_ready) begin failures++; $display("FAIL not ready inside a dot product"); end
    end
    @(posedge clk); t_last = cycle + 1;
    @(negedge clk); in_valid = 0; in_last = 0;
    while (!out_valid) @(negedge clk);
    t_out = cycle;
    got = fp32_val(out_fp32);
    e_dmac  = (got > exact) ? got - exact : exact - got;
    e_naive = (naive > exact) ? naive - exact : exact - naive;
    sum_e_dmac  += e_dmac;
    sum_e_naive += e_naive;
    checks += 2;
    if (got != round_fp32(ref_sum)) begin failures++; $display("FAIL %s result %f exp %f", name, got, ref_sum); end
    if (t_out - t_last != 18) begin failures++; $display("FAIL %s latency %0d", name, t_out - t_last); end
    $display("%s K=%0d: exact=%f dMAC=%f naiveFP8=%f overflows=%0d (%.1f sums/overflow) skipped=%0d",
             name, k, exact, got, naive, n_oflow - ov0, real'(k) / real'(n_oflow - ov0 + 1), n_skip - sk0);
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      run_dot("MobileNetV2", 1280, 1);
      run_dot("ViT-Small",   1536, 0);
      run_dot("ResNet-18",   4608, 1);
    end
    checks++;
    if (!(sum_e_dmac * 2.0 < sum_e_naive)) begin failures++; $display("FAIL dMAC error not well below naive FP8"); end
    $display("total |error|: dMAC=%f naive FP8=%f", sum_e_dmac, sum_e_naive);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
