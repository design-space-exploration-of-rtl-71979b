// tb_selu_8_5_core: exhaustive test of the 5-in / 8-out SELU circuit.
// All 32 inputs are compared with floor(lambda*a*(1-exp(-X/8))*128); output
// bit Y3 is compared with its printed Karnaugh map and Y7 with "X >= 7".
// A watchdog ends the run after 1000 clock cycles.
module tb_selu_8_5_core;
  import tb_ref_pkg::*;

  logic       clk = 1'b0;
  logic [4:0] x;
  logic [7:0] y;
  int checks = 0, failures = 0;
  // Y3 map, bit X = cell X (X4 X3 X2 X1 X0), read from the two 4x4 maps.
  localparam logic [31:0] Y3_KMAP = 32'b1111_1100_0001_1100_1101_1001_0011_0010;

  always #5 clk = ~clk;

  selu_8_5_core dut (.x(x), .y(y));

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      x = 5'(i);
      @(posedge clk);
      checks++;
      if (int'(y) != selu_ladder(i)) begin
        failures++;
        $display("FAIL x=%0d y=%0d expected %0d", i, y, selu_ladder(i));
      end
      checks++;
      if (y[3] != Y3_KMAP[i]) begin
        failures++;
        $display("FAIL Karnaugh map Y3 x=%0d y3=%0b", i, y[3]);
      end
      checks++;
      if (y[7] != (i >= 7)) begin
        failures++;
        $display("FAIL Y7 x=%0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
