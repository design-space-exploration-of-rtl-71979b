// act_pkg: fixed-point formats and constants shared by the tanh and SELU
// activation circuits.
//
// Inputs are sign-magnitude numbers: a sign bit and an unsigned magnitude
// with IN_FRAC = 3 fraction bits, so one input LSB is 1/8. That step is the
// segment width of both approximations: the tanh circuit splits [0, 2) into
// 16 segments of 1/8 (4 input bits) and the SELU circuit splits [-3.875, 0]
// into 32 segments of 1/8 (5 input bits). The magnitude width MAG_W = 8
// (range 0 .. 31.875) is this design's choice; the circuits only look at the
// low bits plus an "out of range" test.
//
// Outputs carry OUT_FRAC = 7 fraction bits, as the SELU encoding (1 integer
// bit + 7 fraction bits) prescribes; the tanh truth table also resolves to
// 7 fraction bits (see tanh_7_4_core).
//
// SELU constants: lambda = 1.0507 and a = 1.6733. lambda is held as the
// 8-fraction-bit constant 269/256 = 1.05078 for the linear (x >= 0) branch;
// lambda*a is held as floor(1.0507 * 1.6733 * 128) = 225 in 1.7 format, the
// saturation value of the negative branch.
package act_pkg;

  localparam int unsigned IN_FRAC  = 3;
  localparam int unsigned OUT_FRAC = 7;
  localparam int unsigned MAG_W    = 8;

  // tanh: 4-bit core index, 7-bit core output, 1.7 unit output.
  localparam int unsigned TANH_IN_W   = 4;
  localparam int unsigned TANH_CORE_W = 7;
  localparam int unsigned TANH_OUT_W  = TANH_CORE_W + 1;
  localparam logic [TANH_OUT_W-1:0] TANH_ONE = TANH_OUT_W'(1 << OUT_FRAC);

  // SELU: 5-bit core index, 8-bit (1.7) core output.
  localparam int unsigned SELU_IN_W   = 5;
  localparam int unsigned SELU_CORE_W = 8;
  localparam int unsigned LAMBDA_FRAC = 8;
  localparam logic [8:0]  LAMBDA_Q8   = 9'd269;          // 1.0507 * 256, truncated
  localparam logic [SELU_CORE_W-1:0] SELU_SAT = 8'd225;  // lambda*a in 1.7
  // |lambda * x| for x up to 2^(MAG_W-IN_FRAC): MAG_W-IN_FRAC+1 integer bits.
  localparam int unsigned SELU_OUT_W  = MAG_W - IN_FRAC + 1 + OUT_FRAC;

  // A sign-magnitude input sample.
  typedef struct packed {
    logic             sign;
    logic [MAG_W-1:0] mag;
  } sm_in_t;

endpackage
