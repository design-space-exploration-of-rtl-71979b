// selu_unit: complete SELU activation for a sign-magnitude input.
//
//   SELU(x) = lambda * x                     for x >= 0
//             -lambda * a * (1 - e^x)        for -3.875 <= x < 0  (selu_8_5_core)
//             -lambda * a                    for x < -3.875
//
// with lambda = 1.0507 and a = 1.6733. The positive branch is linear, so it
// is a constant multiplication: x times 269/256 (lambda with 8 fraction bits),
// which synthesis builds from shifts and adds. The negative branch looks up
// the 32-step ladder of selu_8_5_core with |x| in steps of 1/8; below -3.875
// the output is the constant lambda * a = 225/128.
//
// Interface: x_sign / x_mag (unsigned, 3 fraction bits) in; y_sign / y_mag
// out, y_mag unsigned with 7 fraction bits and enough integer bits for
// lambda * x_max. Purely combinational.
//
// The split into a linear and a constant part and the approximated interval
// follow the paper. Where its text says the saturated output is -a and its
// equation puts lambda in front of all branches, the equation (-lambda*a) is
// followed; x = -3.875 itself goes to the core, per "less than -3.875" in the
// text. The lambda quantization, truncation of lambda*x and the port format
// are this design's choices. An input of -0 gives an output of -0.
module selu_unit
  import act_pkg::*;
(
  input  logic                  x_sign,
  input  logic [MAG_W-1:0]      x_mag,
  output logic                  y_sign,
  output logic [SELU_OUT_W-1:0] y_mag
);

  localparam int unsigned PROD_W = MAG_W + 9;
  localparam int unsigned SHIFT  = IN_FRAC + LAMBDA_FRAC - OUT_FRAC;

  logic                   below;      // x < -3.875 (|x| beyond the core)
  logic [SELU_IN_W-1:0]   core_x;
  logic [SELU_CORE_W-1:0] core_y;
  logic [PROD_W-1:0]      prod;       // |x| * lambda, IN_FRAC+LAMBDA_FRAC fraction bits

  assign below  = |x_mag[MAG_W-1:SELU_IN_W];
  assign core_x = x_mag[SELU_IN_W-1:0];
  assign prod   = PROD_W'(x_mag) * PROD_W'(LAMBDA_Q8);

  selu_8_5_core u_core (
    .x (core_x),
    .y (core_y)
  );

  always_comb begin
    y_sign = x_sign;
    if (!x_sign)
      y_mag = SELU_OUT_W'(prod >> SHIFT);
    else if (below)
      y_mag = SELU_OUT_W'(SELU_SAT);
    else
      y_mag = SELU_OUT_W'(core_y);
  end

endmodule
