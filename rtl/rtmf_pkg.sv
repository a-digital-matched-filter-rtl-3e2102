// rtmf_pkg -- shared constants, types and elaboration-time functions of the
// reverse-time chaos matched filter.
//
// The receiver's FIR coefficients are not stored as a table: they are computed
// while the design is elaborated, from the closed-form basis pulse u_g(t) of the
// reverse-time chaotic oscillator (beta = ln 2, omega = 2*pi, time in units of
// one oscillator period). The pulse used is
//     u_g(t) = 1 - e^{-bt} (cos wt + (b/w) sin wt)              0 <= t < 1
//     u_g(t) = (e^{b} - 1) e^{-bt} (cos wt + (b/w) sin wt)      t >= 1
// normalised to its maximum, which lies at t = 0.5 (there du_g/dt = 0 and the
// value is 1 + e^{-b/2}). The matched filter is the time reversal of the pulse
// over its length T: tap k (of N) holds  round(CMAX * u_g((N-k)*T/N)),  with
// CMAX = 2^(COEF_W-1) - 1. The pulse shape, beta, omega and T = 3 follow the
// paper; the normalisation, the rounding and the coefficient word length are
// this design's choices.
//
// Each integer coefficient is then written in canonical signed-digit form, a
// sum of signed powers of two with the fewest non-zero terms, which the
// shift-and-add weights implement. csd_pos / csd_neg return the bit masks of the
// +1 and -1 digits.
package rtmf_pkg;

  localparam real PI    = 3.14159265358979323846;
  localparam real BETA  = 0.69314718055994530942;   // ln 2
  localparam real OMEGA = 2.0 * PI;

  // Per-sample decision of the s_n reconstruction: signed two-bit value.
  typedef enum logic [1:0] {
    DEC_NONE = 2'b00,   // no change of the recovered symbol
    DEC_POS  = 2'b01,   // new symbol +1
    DEC_NEG  = 2'b11    // new symbol -1
  } decision_e;

  // Reverse-time basis pulse, not normalised.
  function automatic real basis_pulse(real t);
    real osc;
    osc = $cos(OMEGA * t) + (BETA / OMEGA) * $sin(OMEGA * t);
    if (t < 0.0)      return 0.0;
    else if (t < 1.0) return 1.0 - $exp(-BETA * t) * osc;
    else              return ($exp(BETA) - 1.0) * $exp(-BETA * t) * osc;
  endfunction

  // Basis pulse scaled to a maximum of 1.
  function automatic real basis_pulse_norm(real t);
    return basis_pulse(t) / (1.0 + $exp(-BETA / 2.0));
  endfunction

  function automatic int round_real(real v);
    if (v >= 0.0) return $rtoi(v + 0.5);
    else          return -$rtoi(0.5 - v);
  endfunction

  // Coefficient of tap k of an n_taps matched filter spanning pulse_len periods.
  function automatic int mf_coef(int k, int n_taps, real pulse_len, int coef_w);
    real t;
    int  cmax;
    cmax = (1 << (coef_w - 1)) - 1;
    t    = real'(n_taps - k) * pulse_len / real'(n_taps);
    return round_real(real'(cmax) * basis_pulse_norm(t));
  endfunction

  // Canonical signed-digit (non-adjacent form) digit masks of c.
  function automatic logic [31:0] csd_mask(int c, bit negative);
    logic [31:0] m;
    int          v;
    m = '0;
    v = c;
    for (int i = 0; i < 32; i++) begin
      if ((v & 1) != 0) begin
        if ((v & 3) == 1) begin
          if (!negative) m[i] = 1'b1;
          v = v - 1;
        end else begin
          if (negative) m[i] = 1'b1;
          v = v + 1;
        end
      end
      v = v >>> 1;
    end
    return m;
  endfunction

  function automatic logic [31:0] csd_pos(int c);
    return csd_mask(c, 1'b0);
  endfunction

  function automatic logic [31:0] csd_neg(int c);
    return csd_mask(c, 1'b1);
  endfunction

endpackage
