// tb_mgs_dmac_top: end-to-end test of the top at its default parameters
// (4-bit integer dMAC with 8/32-bit accumulators; E4M3 dMAC with 16 five-bit
// narrow registers, 32-bit wide accumulator and subnormal gating).
//
// Two driver processes run at once: integer dot products (done in the cycle
// after the last pair, sometimes carrying the next dot product's first pair)
// and FP8 dot products through the ready/valid port. Every result is compared
// with a reference computed in integers (integer unit) or exact real
// arithmetic (FP8 unit), and its latency checked (2 edges after done; 18 edges
// after the last FP8 pair). Each mechanism must occur at least once, counted
// from the unit's outputs: integer narrow overflow, back-to-back integer dot
// products, FP8 narrow overflow, skipped (gated) pair, FP8 input stall during
// the flush, subnormal product, saturated product.
module tb_mgs_dmac_top;
  import mgs_pkg::*;
  import tb_fp8_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic int_in_valid = 0, int_done = 0;
  logic signed [3:0] int_weight = 0, int_act = 0;
  logic int_out_valid, int_oflow;
  logic signed [31:0] int_out;
  logic fp_in_valid = 0, fp_in_last = 0, fp_in_ready;
  e4m3_t fp_weight = '0, fp_act = '0;
  logic fp_out_valid, fp_oflow, fp_skipped;
  logic [31:0] fp_out_fp32;

  mgs_dmac_top dut (.*);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;
  int n_int_oflow = 0, n_b2b = 0, n_fp_oflow = 0, n_skip = 0, n_stall = 0;
  int n_subn = 0, n_sat = 0, n_int_dp = 0, n_fp_dp = 0;
  int  int_exp_q[$], int_done_q[$];
  real fp_exp_q[$];
  int  fp_last_q[$];
  bit  int_finished = 0, fp_finished = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n) begin
      if (int_oflow) n_int_oflow++;
      if (fp_oflow) n_fp_oflow++;
      if (fp_skipped) n_skip++;
      if (int_out_valid) begin
        int e, d;
        e = int_exp_q.pop_front();
        d = int_done_q.pop_front();
        checks += 2;
        if (int_out !== e) begin failures++; $display("FAIL int result %0d exp %0d", int_out, e); end
        if (cycle - d != 2) begin failures++; $display("FAIL int latency %0d", cycle - d); end
        n_int_dp++;
      end
      if (fp_out_valid) begin
        real e;
        int  l;
        e = fp_exp_q.pop_front();
        l = fp_last_q.pop_front();
        checks += 2;
        if (fp32_val(fp_out_fp32) != e) begin failures++; $display("FAIL fp result %h exp %f", fp_out_fp32, e); end
        if (cycle - l != 18) begin failures++; $display("FAIL fp latency %0d", cycle - l); end
        n_fp_dp++;
      end
    end
  end

  task automatic int_drive(bit v, int w, int a, bit d);
    @(negedge clk);
    int_in_valid = v; int_weight = 4'(w); int_act = 4'(a); int_done = d;
  endtask

  task automatic fp_send(logic [7:0] w, logic [7:0] x, bit last);
    bit taken = 0;
    while (!taken) begin
      @(negedge clk);
      fp_in_valid = 1; fp_weight = e4m3_t'(w); fp_act = e4m3_t'(x); fp_in_last = last;
      #1;
      taken = fp_in_ready;
      if (!fp_in_ready) n_stall++;
      @(posedge clk);
    end
    if (last) fp_last_q.push_back(cycle + 1);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin : int_driver
        int sum, len, w, a;
        bit carry;
        int cw, ca;
        carry = 0; cw = 0; ca = 0;
        for (int dp = 0; dp < 60; dp++) begin
          len = 1 + $urandom_range(0, 30);
          sum = carry ? cw * ca : 0;
          for (int i = 0; i < len; i++) begin
            if (dp % 2 == 0) begin w = $urandom_range(0, 15) - 8; a = $urandom_range(0, 15) - 8; end
            else begin w = 7; a = 7; end
            sum += w * a;
            int_drive(1, w, a, 0);
          end
          carry = 1'($urandom_range(0, 1));
          cw = $urandom_range(0, 15) - 8; ca = $urandom_range(0, 15) - 8;
          if (carry) n_b2b++;
          int_exp_q.push_back(sum);
          int_drive(carry, cw, ca, 1);
          int_done_q.push_back(cycle);
        end
        if (carry) begin
          int_exp_q.push_back(cw * ca);
          int_drive(0, 0, 0, 1);
          int_done_q.push_back(cycle);
        end
        int_drive(0, 0, 0, 0);
        int_finished = 1;
      end
      begin : fp_driver
        real sum, pr;
        int len;
        logic [7:0] w, x;
        for (int dp = 0; dp < 60; dp++) begin
          len = 1 + $urandom_range(0, 40);
          sum = 0.0;
          for (int i = 0; i < len; i++) begin
            case (dp % 3)
              0: begin w = 8'($urandom); x = 8'($urandom); end
              1: begin w = {1'($urandom), 4'($urandom_range(5, 8)), 3'($urandom)};
                       x = {1'($urandom), 4'($urandom_range(6, 8)), 3'($urandom)}; end
              default: begin w = {1'($urandom), 4'($urandom_range(0, 4)), 3'($urandom)};
                             x = {1'($urandom), 4'($urandom_range(0, 6)), 3'($urandom)}; end
            endcase
            if (is_nan(w)) w = 8'h7e;
            if (is_nan(x)) x = 8'hfe;
            pr = round_e4m3(e4m3_val(w) * e4m3_val(x));
            if (pr != 0.0 && pr > -(2.0 ** -6) && pr < 2.0 ** -6) n_subn++;
            if (pr == 448.0 || pr == -448.0) n_sat++;
            sum += pr;
            if (i == len - 1) fp_exp_q.push_back(round_fp32(sum));
            fp_send(w, x, i == len - 1);
          end
        end
        @(negedge clk); fp_in_valid = 0; fp_in_last = 0;
        fp_finished = 1;
      end
    join
    repeat (25) @(negedge clk);
    checks += 9;
    if (int_exp_q.size() != 0 || fp_exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    if (n_int_oflow == 0) begin failures++; $display("FAIL no integer overflow"); end
    if (n_b2b == 0)       begin failures++; $display("FAIL no back-to-back integer dot product"); end
    if (n_fp_oflow == 0)  begin failures++; $display("FAIL no FP8 overflow"); end
    if (n_skip == 0)      begin failures++; $display("FAIL no skipped pair"); end
    if (n_stall == 0)     begin failures++; $display("FAIL no stall"); end
    if (n_subn == 0)      begin failures++; $display("FAIL no subnormal product"); end
    if (n_sat == 0)       begin failures++; $display("FAIL no saturated product"); end
    if (n_int_dp == 0 || n_fp_dp != 60) begin failures++; $display("FAIL result counts"); end
    $display("int: dot products=%0d overflows=%0d back-to-back=%0d", n_int_dp, n_int_oflow, n_b2b);
    $display("fp8: dot products=%0d overflows=%0d skipped=%0d stalls=%0d subnormal=%0d saturated=%0d",
             n_fp_dp, n_fp_oflow, n_skip, n_stall, n_subn, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
