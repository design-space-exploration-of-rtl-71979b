// tanh_unit: complete tanh activation for a sign-magnitude input.
//
// tanh is odd, so only |x| is approximated and the input sign is passed
// straight to the output. For |x| < 2 the magnitude is the 16-step ladder of
// tanh_7_4_core (|x| in steps of 1/8); for |x| >= 2 the output saturates to
// exactly 1.0:
//
//   tanh(x) =  1      for x >= 2
//              g(x)   for -2 < x < 2
//             -1      for x <= -2
//
// Interface: x_sign / x_mag (unsigned, 3 fraction bits) in; y_sign / y_mag
// (unsigned 1.7: one integer bit, set only by saturation, and the core's
// 7 fraction bits) out. Purely combinational.
//
// The oddness, sign pass-through, the [0, 2) core range and the saturation
// follow the paper. The sign-magnitude port format and the input width are
// this design's choice. Magnitude bits below 1/8 (none at the default
// IN_FRAC) would be truncated, keeping the ladder's left-closed segments.
// An input of -0 gives an output of -0 (sign 1, magnitude 0).
module tanh_unit
  import act_pkg::*;
(
  input  logic                  x_sign,
  input  logic [MAG_W-1:0]      x_mag,
  output logic                  y_sign,
  output logic [TANH_OUT_W-1:0] y_mag
);

  // |x| >= 2 means any magnitude bit at or above weight 2 is set.
  localparam int unsigned SAT_BIT = IN_FRAC + 1;

  logic                   saturate;
  logic [TANH_IN_W-1:0]   core_x;
  logic [TANH_CORE_W-1:0] core_y;

  assign saturate = |x_mag[MAG_W-1:SAT_BIT];
  assign core_x   = x_mag[SAT_BIT-1 -: TANH_IN_W];

  tanh_7_4_core u_core (
    .x (core_x),
    .y (core_y)
  );

  always_comb begin
    y_sign = x_sign;
    y_mag  = saturate ? TANH_ONE : {1'b0, core_y};
  end

endmodule
