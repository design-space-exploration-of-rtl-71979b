// tb_act_func_top: end-to-end test of the two-function activation block at
// its default sizes. After a reset it streams 4000 samples, one per cycle
// with in_valid dropped at random, followed by every input of the Q5.3
// range in order. Each result must appear exactly one clock after its input
// (out_valid follows in_valid by one cycle) and equal the reference tanh and
// SELU; while in_valid is low the results must hold. Counted, and required
// to be non-zero: tanh core / positive / negative saturation, SELU linear /
// ladder / saturation, idle (hold) cycles. Watchdog: 20000 cycles.
module tb_act_func_top;
  import act_pkg::*;
  import tb_ref_pkg::*;

  logic                  clk = 1'b0;
  logic                  rst_n, in_valid, x_sign;
  logic [MAG_W-1:0]      x_mag;
  logic                  out_valid, tanh_sign, selu_sign;
  logic [TANH_OUT_W-1:0] tanh_mag;
  logic [SELU_OUT_W-1:0] selu_mag;

  int checks = 0, failures = 0;
  int n_tanh_core = 0, n_tanh_pos = 0, n_tanh_neg = 0;
  int n_selu_lin = 0, n_selu_core = 0, n_selu_sat = 0, n_idle = 0;

  // Expected results of the sample presented in the previous cycle.
  logic                  exp_valid;
  logic                  exp_ts, exp_ss;
  int                    exp_tm, exp_sm;

  always #5 clk = ~clk;

  act_func_top dut (
    .clk, .rst_n, .in_valid, .x_sign, .x_mag,
    .out_valid, .tanh_sign, .tanh_mag, .selu_sign, .selu_mag
  );

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_outputs();
    checks++;
    if (out_valid != exp_valid) begin
      failures++;
      $display("FAIL out_valid=%0b expected %0b at %0t", out_valid, exp_valid, $time);
    end
    checks++;
    if (tanh_sign != exp_ts || int'(tanh_mag) != exp_tm
        || selu_sign != exp_ss || int'(selu_mag) != exp_sm) begin
      failures++;
      $display("FAIL tanh %0b/%0d (exp %0b/%0d) selu %0b/%0d (exp %0b/%0d) at %0t",
               tanh_sign, tanh_mag, exp_ts, exp_tm, selu_sign, selu_mag, exp_ss, exp_sm, $time);
    end
  endtask

  // Drive one cycle; check in the middle of the next one.
  task automatic step(bit v, bit s, int m);
    in_valid = v;
    x_sign   = s;
    x_mag    = MAG_W'(m);
    @(posedge clk);
    #1;
    exp_valid = v;
    if (v) begin
      exp_ts = s;
      exp_tm = ref_tanh_mag(m);
      exp_ss = s;
      exp_sm = ref_selu_mag(s, m);
      if (m < 16) n_tanh_core++; else if (!s) n_tanh_pos++; else n_tanh_neg++;
      if (!s) n_selu_lin++; else if (m < 32) n_selu_core++; else n_selu_sat++;
    end else begin
      n_idle++;
    end
    check_outputs();
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; x_sign = 1'b0; x_mag = '0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (out_valid || tanh_mag != '0 || selu_mag != '0) begin
      failures++;
      $display("FAIL reset state");
    end
    exp_valid = 1'b0; exp_ts = 1'b0; exp_tm = 0; exp_ss = 1'b0; exp_sm = 0;
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      int m;
      // Bias half the samples into the approximated intervals.
      m = ($urandom_range(0, 1) == 1) ? int'($urandom_range(0, 40)) : int'($urandom_range(0, 255));
      step($urandom_range(0, 3) != 0, 1'($urandom_range(0, 1)), m);
    end
    for (int s = 0; s < 2; s++)
      for (int m = 0; m < (1 << MAG_W); m++)
        step(1'b1, 1'(s), m);
    step(1'b0, 1'b0, 0);
    checks++;
    if (n_tanh_core == 0 || n_tanh_pos == 0 || n_tanh_neg == 0 || n_selu_lin == 0
        || n_selu_core == 0 || n_selu_sat == 0 || n_idle == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("tanh core=%0d sat+=%0d sat-=%0d | selu linear=%0d ladder=%0d sat=%0d | idle=%0d",
             n_tanh_core, n_tanh_pos, n_tanh_neg, n_selu_lin, n_selu_core, n_selu_sat, n_idle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
