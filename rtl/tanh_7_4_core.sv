// tanh_7_4_core: purely combinational approximation of tanh on [0, 2),
// 4-bit input and 7-bit output ("tanh 7_4").
//
// The input X = X3..X0 is |x| in steps of 1/8, so X = 0..15 stands for
// x = 0 .. 1.875 (the 16 segments of [0, 2)). The output Y = Y6..Y0 is the
// step ("ladder") function g(X) = floor(tanh(X/8) * 128), i.e. tanh with
// 7 fraction bits: 0, 15, 31, 45, 59, 70, 81, 90, 97, 103, 108, 112, 115, 118,
// 120, 122 for X = 0..15.
//
// Each output bit is a two-level AND-OR (sum of products) expression, one
// product per group of 1s in that bit's Karnaugh map. Y6..Y1 use exactly the
// product lists of the published AND/OR-plane table for this circuit; the
// complement bars of that table are not legible, so the polarity of each
// literal was fixed so that the bit equals the truth table above. Y1 is the
// worked example: X2~X1 + X2X0 + ~X1X0 + ~X3~X2X1~X0, the four groups of its
// printed Karnaugh map. The published Y0 products cannot produce the LSB of
// this truth table under any polarity (they would need g(5) = 71 rather than
// 70), so Y0 is this design's own minimal cover of the truth table.
//
// There is no clock: the delay is that of two gate levels. Which truth table
// the figure and table describe (step 1/8, 7 fraction bits, truncation) was
// inferred from them; the text's "1 integer bit, 6 fraction bits" for the
// 7-bit output does not fit the printed Karnaugh map, which needs 7 fraction
// bits.
module tanh_7_4_core (
  input  logic [3:0] x,
  output logic [6:0] y
);

  logic x3, x2, x1, x0;
  assign {x3, x2, x1, x0} = x;

  always_comb begin
    y[6] = ( x2 &  x1) | ( x2 &  x0) | x3;
    y[5] = (~x2 &  x1 &  x0) | ( x2 & ~x1 & ~x0) | x3;
    y[4] = (~x3 &  x1 & ~x0) | ( x3 &  x1 &  x0) | ( x3 &  x2)
         | ( x2 &  x1) | ( x2 & ~x0);
    y[3] = (~x3 & ~x2 & ~x1 &  x0) | (~x2 &  x1 & ~x0) | (~x3 &  x1 &  x0)
         | ( x3 &  x2 &  x1) | (~x3 & ~x2 &  x0) | (~x3 &  x2 & ~x1 & ~x0)
         | (~x3 &  x1 &  x0);
    y[2] = (~x1 &  x0) | (~x3 & ~x2 &  x1) | (~x3 & ~x2 &  x0)
         | (~x2 &  x1 & ~x0);
    y[1] = (~x3 & ~x2 &  x1 & ~x0) | ( x2 & ~x1) | (~x1 &  x0) | ( x2 &  x0);
    y[0] = (~x3 & ~x2 &  x0) | (~x3 & ~x2 &  x1) | (~x3 &  x2 & ~x0)
         | ( x3 & ~x2 & ~x1) | ( x2 & ~x1 & ~x0);
  end

endmodule
