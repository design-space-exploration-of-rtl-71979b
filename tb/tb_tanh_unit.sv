// tb_tanh_unit: checks the complete tanh activation for every input
// (both signs, every magnitude of the 8-bit Q5.3 range). The magnitude must
// equal the ladder below |x| = 2 and exactly 1.0 from 2 on, and the sign must
// pass through. Counts of core-region, positive-saturation and
// negative-saturation samples must all be non-zero. Watchdog: 2000 cycles.
module tb_tanh_unit;
  import act_pkg::*;
  import tb_ref_pkg::*;

  logic                  clk = 1'b0;
  logic                  x_sign, y_sign;
  logic [MAG_W-1:0]      x_mag;
  logic [TANH_OUT_W-1:0] y_mag;
  int checks = 0, failures = 0;
  int n_core = 0, n_sat_pos = 0, n_sat_neg = 0;

  always #5 clk = ~clk;

  tanh_unit dut (.x_sign(x_sign), .x_mag(x_mag), .y_sign(y_sign), .y_mag(y_mag));

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
        if (int'(y_mag) != ref_tanh_mag(m) || y_sign != x_sign) begin
          failures++;
          $display("FAIL sign=%0d mag=%0d -> %0d/%0d expected %0d", s, m, y_sign, y_mag, ref_tanh_mag(m));
        end
        if (m < 16) n_core++;
        else if (s == 0) n_sat_pos++;
        else n_sat_neg++;
      end
    end
    checks++;
    if (n_core == 0 || n_sat_pos == 0 || n_sat_neg == 0) failures++;
    $display("core=%0d sat_pos=%0d sat_neg=%0d", n_core, n_sat_pos, n_sat_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
