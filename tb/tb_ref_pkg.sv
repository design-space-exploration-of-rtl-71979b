// tb_ref_pkg: reference models for the activation testbenches, written from
// the mathematical definitions with real arithmetic, independent of the RTL
// truth tables.
//
//   tanh ladder : floor(tanh(X/8) * 128)                         X = 0..15
//   SELU ladder : floor(lambda*a*(1 - exp(-X/8)) * 128)          X = 0..31
//   tanh(x)     : sign(x) * (|x| >= 2 ? 1.0 : ladder(floor(8|x|)))   in 1.7
//   SELU(x)     : x >= 0 ? floor(x * 269/256 * 128)
//                        : -(|x| > 3.875 ? floor(lambda*a*128) : ladder)
package tb_ref_pkg;

  localparam real LAMBDA = 1.0507;
  localparam real ALPHA  = 1.6733;

  function automatic int tanh_ladder(int x);
    return int'($floor($tanh(real'(x) / 8.0) * 128.0));
  endfunction

  function automatic int selu_ladder(int x);
    return int'($floor(LAMBDA * ALPHA * (1.0 - $exp(-real'(x) / 8.0)) * 128.0));
  endfunction

  // Magnitude of tanh for an input magnitude given in units of 1/8.
  function automatic int ref_tanh_mag(int mag8);
    if (real'(mag8) / 8.0 >= 2.0) return 128;
    return tanh_ladder(mag8);
  endfunction

  // Magnitude of SELU for a sign and an input magnitude in units of 1/8.
  function automatic int ref_selu_mag(bit neg, int mag8);
    if (!neg) return int'($floor(real'(mag8) / 8.0 * (269.0 / 256.0) * 128.0));
    if (real'(mag8) / 8.0 > 3.875) return int'($floor(LAMBDA * ALPHA * 128.0));
    return selu_ladder(mag8);
  endfunction

endpackage
