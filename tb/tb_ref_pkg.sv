// tb_ref_pkg -- reference models shared by the testbenches.
//
// Written separately from the design's own package: with beta = ln 2 the
// exponential e^{-beta t} is 2^{-t} and e^{beta} - 1 is 1, which this model
// uses directly, so an error in either formulation shows as a mismatch.
package tb_ref_pkg;

  localparam real TWO_PI = 6.28318530717958647692;
  localparam real B_OVER_W = 0.69314718055994530942 / TWO_PI;

  // Reverse-time basis pulse scaled to a peak of 1 (peak at t = 0.5).
  function automatic real ref_pulse(real t);
    real osc, v;
    osc = $cos(TWO_PI * t) + B_OVER_W * $sin(TWO_PI * t);
    if (t < 0.0)      v = 0.0;
    else if (t < 1.0) v = 1.0 - $pow(2.0, -t) * osc;
    else              v = $pow(2.0, -t) * osc;
    return v / (1.0 + $pow(2.0, -0.5));
  endfunction

  function automatic int ref_round(real v);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(0.5 - v));
  endfunction

  // Tap k of an n-tap matched filter over pulse_len periods, coef_w-bit words.
  function automatic int ref_coef(int k, int n, real pulse_len, int coef_w);
    return ref_round(real'((1 << (coef_w - 1)) - 1) *
                     ref_pulse(pulse_len * real'(n - k) / real'(n)));
  endfunction

  // Approximately standard normal value: sum of 12 uniforms minus 6.
  function automatic real gauss();
    real acc;
    acc = 0.0;
    for (int i = 0; i < 12; i++) acc += real'($urandom % 65536) / 65536.0;
    return acc - 6.0;
  endfunction

endpackage
