// tb_tanh_7_4_core: exhaustive test of the 4-in / 7-out tanh circuit.
// All 16 inputs are compared with floor(tanh(X/8)*128), and output bit Y1 is
// compared cell by cell with its printed Karnaugh map (1s at X = 1, 2, 4, 5,
// 7, 9, 12, 13, 15). A watchdog ends the run after 1000 clock cycles.
module tb_tanh_7_4_core;
  import tb_ref_pkg::*;

  logic       clk = 1'b0;
  logic [3:0] x;
  logic [6:0] y;
  int checks = 0, failures = 0;
  localparam logic [15:0] Y1_KMAP = 16'b1011_0010_1011_0110;  // bit X = map cell X

  always #5 clk = ~clk;

  tanh_7_4_core dut (.x(x), .y(y));

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      x = 4'(i);
      @(posedge clk);
      checks++;
      if (int'(y) != tanh_ladder(i)) begin
        failures++;
        $display("FAIL x=%0d y=%0d expected %0d", i, y, tanh_ladder(i));
      end
      checks++;
      if (y[1] != Y1_KMAP[i]) begin
        failures++;
        $display("FAIL Karnaugh map Y1 x=%0d y1=%0b", i, y[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
