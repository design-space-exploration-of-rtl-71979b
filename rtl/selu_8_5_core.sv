// selu_8_5_core: purely combinational approximation of the negative branch
// of SELU, 5-bit input and 8-bit output ("SELU 8_5").
//
// The input X = X4..X0 is |x| in steps of 1/8: X = 0..31 stands for
// x = 0 .. -3.875, the 32 segments of [-3.875, 0]. The output is the
// magnitude of lambda * a * (e^x - 1) in 1.7 fixed point (1 integer bit,
// 7 fraction bits), truncated:
//
//   y(X) = floor(lambda * a * (1 - e^(-X/8)) * 128),  lambda = 1.0507, a = 1.6733
//
//   X  0..15 :   0  26  49  70  88 104 118 131 142 151 160 168 174 180 185 190
//   X 16..31 : 194 198 201 204 206 208 210 212 213 215 216 217 218 219 219 220
//
// i.e. from 0 (X = 0) to 220 (X = 31, 1.719). The caller applies the sign.
//
// Each output bit is a two-level AND-OR expression, a minimal cover of that
// bit's Karnaugh map (prime implicants, fewest products and literals). This
// truth table (step 1/8, lambda*a scaling, 1.7 output, truncation) follows
// the paper's printed Karnaugh map of output bit Y3, which it reproduces in
// all 32 cells. Y7 = X4 + X3 + X2X1X0 matches the paper's three-product row
// for Y7 (whose bar over X0 does not fit the table and is dropped).
// The paper's AND plane for the other bits repeats products verbatim and
// its complement bars are illegible, so those bits are this design's own
// minimisation of the same truth table rather than a copy of the paper's
// product list.
//
// There is no clock: the output follows the input after two gate levels.
module selu_8_5_core (
  input  logic [4:0] x,
  output logic [7:0] y
);

  logic x4, x3, x2, x1, x0;
  assign {x4, x3, x2, x1, x0} = x;

  always_comb begin
    y[7] = x3 | x4 | (x2 & x1 & x0);
    y[6] = x4 | (~x3 & x2 & ~x1) | (~x3 & x2 & ~x0) | (~x3 & ~x2 & x1 & x0);
    y[5] = (~x4 & x1 & ~x0) | (~x4 & x3 & x1) | (~x4 & x3 & x2)
         | (~x4 & x2 & ~x1 & x0);
    y[4] = (x4 & x3) | (x2 & x1 & ~x0) | (x3 & x2 & x0) | (x4 & x2 & x0)
         | (~x4 & ~x2 & ~x1 & x0) | (~x4 & ~x3 & x1 & ~x0) | (~x4 & ~x3 & x2 & ~x0);
    y[3] = (x2 & ~x1 & ~x0) | (x3 & x1 & x0) | (x3 & x2 & x1) | (x4 & ~x2 & x1)
         | (x4 & x3 & x2) | (~x4 & ~x3 & ~x1 & x0) | (~x4 & x3 & ~x1 & ~x0);
    y[2] = (~x4 & x3 & ~x1) | (x3 & ~x2 & ~x1) | (~x3 & ~x2 & x1 & x0)
         | (x3 & x2 & x1 & x0) | (x4 & ~x3 & ~x2 & x0) | (x4 & ~x3 & x1 & x0)
         | (~x4 & ~x3 & x2 & x1 & ~x0) | (x4 & ~x3 & x2 & ~x1 & ~x0);
    y[1] = (~x2 & ~x1 & x0) | (x4 & x2 & ~x0) | (~x4 & ~x3 & ~x2 & x0)
         | (~x4 & ~x3 & x2 & x1) | (~x4 & x2 & x1 & x0) | (~x4 & x3 & ~x1 & ~x0)
         | (x4 & ~x3 & ~x1 & ~x0) | (x4 & x3 & x2 & ~x1);
    y[0] = (~x3 & ~x2 & x1 & ~x0) | (x3 & ~x2 & ~x1 & x0) | (x3 & x2 & x1 & ~x0)
         | (x4 & x3 & ~x2 & ~x1) | (x4 & x3 & ~x2 & x0) | (x4 & x3 & ~x1 & x0)
         | (~x4 & ~x3 & x2 & x1 & x0);
  end

endmodule
