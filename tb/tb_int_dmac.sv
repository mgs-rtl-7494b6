// tb_int_dmac: self-checking testbench for the integer dual-accumulator MAC.
//
// Drives random signed 4-bit dot products of random length (some with 127/-128
// style large partial sums that force narrow overflows), with done raised in
// the cycle after the last pair and sometimes carrying the next dot product's
// first pair. A reference computed here, in plain integers, gives each dot
// product and the number of narrow overflows a NARROW-bit accumulator must see
// (spill when the sum leaves [-2^(NARROW-1), 2^(NARROW-1)-1]). Checks: the
// result, the 2-cycle done-to-out_valid latency, out == 0 outside out_valid,
// and the overflow pulse count.
module tb_int_dmac;
  localparam int W = 4, A = 4, NAR = 8, WID = 32;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, done = 0;
  logic signed [W-1:0] weight = 0;
  logic signed [A-1:0] act = 0;
  logic out_valid, oflow;
  logic signed [WID-1:0] out;

  int checks = 0, failures = 0;
  int cycle = 0;

  int_dmac #(.W_BITS(W), .A_BITS(A), .NARROW(NAR), .WIDE(WID)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, queued in order
  int exp_q[$];
  int done_cycle_q[$];
  int oflow_seen = 0;
  int oflow_exp = 0;
  int results = 0;

  // reference narrow accumulator for overflow counting
  int ref_a8 = 0;
  function automatic void ref_add(int p);
    int s = ref_a8 + p;
    if (s > (2**(NAR-1)) - 1 || s < -(2**(NAR-1))) begin
      oflow_exp++;
      ref_a8 = p;
    end else ref_a8 = s;
  endfunction

  always @(negedge clk) begin
    if (rst_n) begin
      if (oflow) oflow_seen++;
      if (out_valid) begin
        int e, dc;
        checks++;
        e = exp_q.pop_front();
        dc = done_cycle_q.pop_front();
        if (out !== e) begin
          failures++;
          $display("FAIL result got %0d exp %0d", out, e);
        end
        checks++;
        if (cycle - dc != 2) begin
          failures++;
          $display("FAIL latency %0d", cycle - dc);
        end
        results++;
      end else begin
        checks++;
        if (out != 0) begin failures++; $display("FAIL out not zero while idle"); end
      end
    end
  end

  task automatic drive(bit v, int wv, int av, bit d);
    @(negedge clk);
    in_valid = v; weight = W'(wv); act = A'(av); done = d;
  endtask

  initial begin
    int len, sum, wv, av, mode;
    bit carry_first;
    int carry_w, carry_a;
    repeat (3) @(negedge clk);
    rst_n = 1;
    carry_first = 0;
    for (int dp = 0; dp < 300; dp++) begin
      len  = 1 + $urandom_range(0, 40);
      mode = $urandom_range(0, 2);
      sum  = 0;
      ref_a8 = 0;
      if (carry_first) begin
        sum = carry_w * carry_a;
        ref_a8 = sum;
        len--;
      end
      for (int i = 0; i < len; i++) begin
        if (mode == 0) begin          // same-sign large products: many overflows
          wv = -8 + $urandom_range(0, 1) * 15; av = wv;
        end else begin
          wv = $urandom_range(0, 15) - 8; av = $urandom_range(0, 15) - 8;
        end
        ref_add(wv * av);
        sum += wv * av;
        drive(1, wv, av, 0);
        if ($urandom_range(0, 4) == 0) drive(0, 0, 0, 0);   // bubble
      end
      // done cycle, sometimes with the next dot product's first pair
      carry_first = 1'($urandom_range(0, 1));
      carry_w = $urandom_range(0, 15) - 8;
      carry_a = $urandom_range(0, 15) - 8;
      exp_q.push_back(sum);
      drive(carry_first, carry_w, carry_a, 1);
      done_cycle_q.push_back(cycle);
    end
    if (carry_first) begin
      exp_q.push_back(carry_w * carry_a);
      drive(0, 0, 0, 1);
      done_cycle_q.push_back(cycle);
    end
    drive(0, 0, 0, 0);
    repeat (5) @(negedge clk);
    checks++;
    if (oflow_seen != oflow_exp || oflow_exp == 0) begin
      failures++;
      $display("FAIL overflow count got %0d exp %0d", oflow_seen, oflow_exp);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("results=%0d overflows=%0d", results, oflow_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
