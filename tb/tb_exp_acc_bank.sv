// tb_exp_acc_bank: random operation sequence against a reference bank of 16
// integers. Each cycle an ACC (random register, random 5-bit mantissa, biased
// toward one sign so that overflows happen), FLUSH or IDLE is applied; the
// combinational oflow/spill outputs are checked before the edge and the
// register contents through later spills. The run ends by flushing all 16
// registers and comparing them with the reference.
module tb_exp_acc_bank;
  import mgs_pkg::*;
  localparam int N = 16, NAR = 5;

  logic clk = 0, rst_n = 0;
  bank_op_e op = BANK_IDLE;
  logic [3:0] idx = 0;
  logic signed [NAR-1:0] mant = 0;
  logic oflow, spill_valid;
  logic signed [NAR-1:0] spill_val;
  int checks = 0, failures = 0, n_oflow = 0, n_flush = 0;
  int ref_r[N];

  exp_acc_bank #(.N_EXP(N), .NARROW(NAR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(bank_op_e o, int i, int m);
    int s;
    bit eo;
    @(negedge clk);
    op = o; idx = 4'(i); mant = NAR'(m);
    #1;
    s  = ref_r[i] + m;
    eo = (o == BANK_ACC) && (s > 15 || s < -16);
    checks++;
    if (oflow !== eo) begin failures++; $display("FAIL oflow op=%0d i=%0d", o, i); end
    checks++;
    if (spill_valid !== (eo || o == BANK_FLUSH)) begin failures++; $display("FAIL spill_valid"); end
    if (eo || o == BANK_FLUSH) begin
      checks++;
      if (spill_val !== NAR'(ref_r[i])) begin
        failures++; $display("FAIL spill_val got %0d exp %0d", spill_val, ref_r[i]);
      end
    end
    if (eo) n_oflow++;
    if (o == BANK_FLUSH) n_flush++;
    case (o)
      BANK_ACC:   ref_r[i] = eo ? m : s;
      BANK_FLUSH: ref_r[i] = 0;
      default: ;
    endcase
  endtask

  initial begin
    int r, m;
    for (int i = 0; i < N; i++) ref_r[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 20000; k++) begin
      r = $urandom_range(0, 99);
      m = $urandom_range(8, 15);
      if ((k / 500) % 2 == 1 && $urandom_range(0, 1) == 1) m = -m;
      if ($urandom_range(0, 9) == 0) m = $urandom_range(0, 31) - 16;
      if (r < 85)      apply(BANK_ACC, $urandom_range(0, N - 1), m);
      else if (r < 92) apply(BANK_FLUSH, $urandom_range(0, N - 1), 0);
      else             apply(BANK_IDLE, $urandom_range(0, N - 1), m);
    end
    for (int i = 0; i < N; i++) apply(BANK_FLUSH, i, 0);
    checks++;
    if (n_oflow == 0 || n_flush == 0) failures++;
    $display("overflows=%0d flushes=%0d", n_oflow, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
