// tb_selu_unit: checks the complete SELU activation for every input (both
// signs, every magnitude of the 8-bit Q5.3 range): lambda*x for x >= 0, the
// ladder for -3.875 <= x < 0 and -lambda*a below, with the sign passed
// through. Each of the three branches must be hit. Watchdog: 2000 cycles.
module tb_selu_unit;
  import act_pkg::*;
  import tb_ref_pkg::*;

  logic                  clk = 1'b0;
  logic                  x_sign, y_sign;
  logic [MAG_W-1:0]      x_mag;
  logic [SELU_OUT_W-1:0] y_mag;
  int checks = 0, failures = 0;
  int n_lin = 0, n_core = 0, n_sat = 0;

  always #5 clk = ~clk;

  selu_unit dut (.x_sign(x_sign), .x_mag(x_mag), .y_sign(y_sign), .y_mag(y_mag));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++) begin
      for (int m = 0; m < (1 << MAG_W); m++) begin
        x_sign = 1'(s);
        x_mag  = MAG_W'(m);
        @(posedge clk);
        checks++;
        if (int'(y_mag) != ref_selu_mag(1'(s), m) || y_sign != x_sign) begin
          failures++;
          $display("FAIL sign=%0d mag=%0d -> %0d/%0d expected %0d", s, m, y_sign, y_mag, ref_selu_mag(1'(s), m));
        end
        if (s == 0) n_lin++;
        else if (m < 32) n_core++;
        else n_sat++;
      end
    end
    checks++;
    if (n_lin == 0 || n_core == 0 || n_sat == 0) failures++;
    $display("linear=%0d core=%0d saturated=%0d", n_lin, n_core, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
