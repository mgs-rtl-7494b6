// tb_fp8_dmac: end-to-end check of the FP8 dMAC, one instance with subnormal
// gating (SKIP_EN=1) and one without, fed the same operand stream.
//
// A directed dot product first adds -0.25 and -0.029296875, the two E4M3
// values that a 4-bit-significand adder swamps to -0.25; the exact sum is
// expected. Dot products of random length are then drawn from four operand mixes: uniform
// random E4M3 bytes, values with clustered exponents (many narrow overflows),
// mostly tiny values (many skipped pairs) and a repeated constant. Input
// bubbles are inserted at random. The reference rounds every exact product to
// E4M3 (real arithmetic), adds them exactly and rounds the sum to binary32.
// Checks per dot product: both results equal the reference; out_valid comes 18
// edges after the last pair is taken; no input is taken while in_ready is low.
// Over the run: the overflow pulses equal those of a reference model of 16
// five-bit registers, the skip pulses equal the number of pairs whose product
// is certain to round to zero, and stalls, overflows and skips all occurred.
module tb_fp8_dmac;
  import mgs_pkg::*;
  import tb_fp8_ref_pkg::*;

  localparam int LAT = 18;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  e4m3_t weight = '0, act = '0;
  logic rdy_s, rdy_n, ov_s, ov_n, oflow_s, oflow_n, sk_s, sk_n;
  logic [31:0] out_s, out_n;

  fp8_dmac #(.SKIP_EN(1'b1)) dut_s (
    .clk, .rst_n, .in_valid, .in_ready(rdy_s), .weight, .act, .in_last,
    .out_valid(ov_s), .out_fp32(out_s), .oflow(oflow_s), .skipped(sk_s));
  fp8_dmac #(.SKIP_EN(1'b0)) dut_n (
    .clk, .rst_n, .in_valid, .in_ready(rdy_n), .weight, .act, .in_last,
    .out_valid(ov_n), .out_fp32(out_n), .oflow(oflow_n), .skipped(sk_n));

  int checks = 0, failures = 0;
  int cycle = 0;
  int n_oflow_s = 0, n_oflow_n = 0, n_skip = 0, n_stall = 0, n_dp = 0;
  int exp_oflow = 0, exp_skip = 0;
  real exp_q[$];
  int  last_q[$];
  int  ref_r[16];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      if (oflow_s) n_oflow_s++;
      if (oflow_n) n_oflow_n++;
      if (sk_s) n_skip++;
      checks++;
      if (sk_n || rdy_s !== rdy_n || ov_s !== ov_n) begin
        failures++; $display("FAIL the two instances differ in handshake");
      end
      if (ov_s) begin
        real e;
        int  lc;
        e  = exp_q.pop_front();
        lc = last_q.pop_front();
        checks += 3;
        if (fp32_val(out_s) != e) begin failures++; $display("FAIL skip result %h exp %f", out_s, e); end
        if (out_n !== out_s)      begin failures++; $display("FAIL no-skip result %h vs %h", out_n, out_s); end
        if (cycle - lc != LAT)    begin failures++; $display("FAIL latency %0d", cycle - lc); end
        n_dp++;
      end
    end
  end

  // reference narrow registers: count overflows for one rounded product
  function automatic void ref_narrow(real r);
    real a = (r < 0.0) ? -r : r;
    int e, sig, s;
    if (a == 0.0) return;
    if (a < 2.0 ** -6) begin e = 0; sig = int'(a / (2.0 ** -9)); end
    else begin e = flog2(a) + 7; sig = int'(a / (2.0 ** (flog2(a) - 3))); end
    if (r < 0.0) sig = -sig;
    s = ref_r[e] + sig;
    if (s > 15 || s < -16) begin exp_oflow++; ref_r[e] = sig; end
    else ref_r[e] = s;
  endfunction

  function automatic logic [7:0] gen(int mode);
    logic [7:0] b;
    case (mode)
      0: b = 8'($urandom);
      1: b = {1'($urandom), 4'($urandom_range(5, 8)), 3'($urandom)};
      2: b = ($urandom_range(0, 4) == 0) ? {1'($urandom), 4'($urandom_range(4, 9)), 3'($urandom)}
                                         : {1'($urandom), 4'($urandom_range(0, 2)), 3'($urandom)};
      default: b = 8'h48;   // 2.0
    endcase
    if (is_nan(b)) b = 8'h7e;
    return b;
  endfunction

  // Offer one pair until it is taken; returns after the accepting edge.
  task automatic send(logic [7:0] w, logic [7:0] x, bit last);
    bit taken = 0;
    while (!taken) begin
      @(negedge clk);
      if ($urandom_range(0, 5) == 0) begin
        in_valid = 0; in_last = 0;
        @(posedge clk);
      end else begin
        in_valid = 1; weight = e4m3_t'(w); act = e4m3_t'(x); in_last = last;
        #1;
        taken = rdy_s;
        if (!rdy_s) n_stall++;
        @(posedge clk);
      end
    end
    if (last) last_q.push_back(cycle + 1);
  endtask

  initial begin
    int len, mode;
    real sum, pr;
    logic [7:0] w, x;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Swamping example: 1.0 * -0.25 + 1.0 * -0.029296875. Adding the two E4M3
    // values directly with a 4-bit significand gives -0.25; the dMAC must give
    // the exact -0.279296875.
    exp_q.push_back(-0.279296875);
    send(8'h38, 8'ha8, 0);
    send(8'h38, 8'h8f, 1);
    for (int dp = 0; dp < 400; dp++) begin
      mode = dp % 4;
      len  = (dp == 7) ? 1000 : 1 + $urandom_range(0, 63);
      sum  = 0.0;
      for (int i = 0; i < 16; i++) ref_r[i] = 0;
      for (int i = 0; i < len; i++) begin
        w  = gen(mode);
        x  = (mode == 3) ? 8'h48 : gen(mode);
        pr = round_e4m3(e4m3_val(w) * e4m3_val(x));
        sum += pr;
        ref_narrow(pr);
        if (e4m3_val(w) == 0.0 || e4m3_val(x) == 0.0 ||
            max_prod_for_exps(w[6:3], x[6:3]) < 2.0 ** -9) exp_skip++;
        if (i == len - 1) exp_q.push_back(round_fp32(sum));
        send(w, x, i == len - 1);
      end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (LAT + 5) @(negedge clk);
    checks += 5;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    if (n_oflow_s != exp_oflow || n_oflow_n != exp_oflow || exp_oflow == 0) begin
      failures++; $display("FAIL overflows %0d/%0d exp %0d", n_oflow_s, n_oflow_n, exp_oflow);
    end
    if (n_skip != exp_skip || exp_skip == 0) begin
      failures++; $display("FAIL skips %0d exp %0d", n_skip, exp_skip);
    end
    if (n_stall == 0) begin failures++; $display("FAIL no stall seen"); end
    if (n_dp != 401) begin failures++; $display("FAIL %0d results", n_dp); end
    $display("dot products=%0d overflows=%0d skipped=%0d stalls=%0d", n_dp, n_oflow_s, n_skip, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
