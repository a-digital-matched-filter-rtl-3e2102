// tb_rtmf_top -- end-to-end test of the receiver at its default size
// (100 taps, 10-bit input, 32-bit arithmetic).
//
// The testbench plays the transmitter and the channel. The reverse-time
// chaotic waveform is built from its closed-form solution,
// u(t) = sum_n s_n u_g(t - n), with a random symbol s_n = +-1 per oscillator
// period, sampled at N_TAPS/3 samples per period and scaled to 10 bits.
// Four scenes are run, each after a reset:
//   A. basis pulses +1, +1, -1 among small random samples: the filter output
//      must peak N_TAPS samples after the first pulse starts, and exactly two
//      +1 decisions and one -1 decision must result;
//   B. the noiseless chaotic waveform;
//   C. the chaotic waveform with Gaussian noise of equal power (SNR 0 dB);
//   D. the chaotic waveform at reduced amplitude with a large negative noise
//      burst, so full-scale samples are clipped;
//   E. (run after A) one basis pulse in Gaussian noise of equal power: the
//      output must still peak within 8 samples of the noise-free position.
// In every scene every filter output is compared with a direct convolution
// computed here. In B and C the recovered symbols are compared with the
// transmitted ones after the filter delay (found as the delay with the fewest
// errors); the bit error rate must be 0 in B and below 5 % in C, and after
// every clock the recovered symbol must equal a model of the threshold rule
// applied to the expected filter output. Each mechanism of the receiver --
// +1 and -1 decisions, excursions ignored for lack of a midpoint crossing,
// a symbol detected again -- and input clipping are counted and must occur.
module tb_rtmf_top;
  import tb_ref_pkg::*;
  import rtmf_pkg::decision_e;
  localparam int  N = 100, IN_W = 10, ACC_W = 32, COEF_W = 8;
  localparam real T = 3.0;
  localparam real SPU = real'(N) / T;        // samples per oscillator period
  localparam int  NSYM = 200;
  localparam int  TAIL = 12;                 // periods of pulse tail generated

  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_no_cross = 0, n_repeat = 0, n_clipped = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [IN_W-1:0]  adc_data = '0;
  logic signed [ACC_W-1:0] thr_high = '0, thr_mid = '0, thr_low = '0, mf_out;
  decision_e decision;
  logic s_rec, s_valid;

  int f [N];
  int xs [$];
  int sym [NSYM];
  int rec [];
  int pulse_tab [];

  rtmf_top dut (.clk, .rst_n, .adc_data, .thr_high, .thr_mid, .thr_low,
                .mf_out, .decision, .s_rec, .s_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clip(int v);
    if (v > 511) begin n_clipped++; return 511; end
    if (v < -512) begin n_clipped++; return -512; end
    return v;
  endfunction

  task automatic do_reset();
    rst_n = 1'b0;
    adc_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    xs.delete();
    for (int k = 0; k < N; k++) xs.push_back(0);
  endtask

  // Apply one sample; check mf_out; return the recovered symbol seen.
  task automatic step(int v, output longint y);
    longint acc;
    adc_data = IN_W'(v);
    xs.push_back(v);
    @(posedge clk); #1;
    acc = 0;
    for (int k = 0; k < N; k++) acc += longint'(f[k]) * xs[xs.size() - 1 - k];
    void'(xs.pop_front());
    checks++;
    if (longint'(mf_out) != acc) begin
      failures++;
      if (failures < 12) $display("FAIL mf_out=%0d expected %0d", mf_out, acc);
    end
    y = acc;
    if (decision == rtmf_pkg::DEC_POS) n_pos++;
    if (decision == rtmf_pkg::DEC_NEG) n_neg++;
  endtask

  // Chaotic waveform sample n (not scaled) from the symbol sequence.
  function automatic real chaos(int n);
    real t, u;
    int  m0;
    t  = real'(n) / SPU;
    m0 = int'($floor(t));
    u  = 0.0;
    for (int m = m0 - TAIL; m <= m0; m++)
      if (m >= 0 && m < NSYM) u += real'(sym[m]) * ref_pulse(t - real'(m));
    return u;
  endfunction

  // Bit error rate of rec[] against sym[] with the best delay.
  function automatic real best_ber(output int best_d);
    real best;
    best = 2.0;
    best_d = -1;
    for (int d = 0; d < 3 * N; d++) begin
      int err, tot;
      err = 0; tot = 0;
      for (int m = 5; m < NSYM - 15; m++) begin
        int idx;
        idx = int'($floor(real'(m) * SPU + SPU / 2.0)) + d;
        tot++;
        if (rec[idx] != sym[m]) err++;
      end
      if (real'(err) / real'(tot) < best) begin
        best = real'(err) / real'(tot);
        best_d = d;
      end
    end
    return best;
  endfunction

  // Run a chaotic scene; the decisions are compared with a model of the rule.
  task automatic run_chaos(real amp, real noise_sd, bit burst, output real ber, output int dly);
    int  len;
    longint y, ymax;
    bit  armed, prev_side, have_prev;
    int  cur;
    len = int'(real'(NSYM) * SPU);
    rec = new[len];
    // thresholds: 30 % of the largest output of a single full pulse
    ymax = 0;
    for (int k = 0; k < N; k++)
      ymax += longint'(f[k]) * ref_round(amp * ref_pulse(real'(N - k) / SPU));
    thr_high = ACC_W'(ymax * 3 / 10);
    thr_low  = -ACC_W'(ymax * 3 / 10);
    thr_mid  = '0;
    do_reset();
    armed = 1; have_prev = 0; prev_side = 0; cur = 0;
    for (int n = 0; n < len; n++) begin
      int v;
      bit side;
      v = ref_round(amp * chaos(n) + noise_sd * gauss());
      if (burst && n >= len / 2 && n < len / 2 + 20) v = -2000;
      step(clip(v), y);
      // The outputs now show the rule applied to the previous filter output.
      rec[n] = s_valid ? (s_rec ? 1 : -1) : 0;
      checks++;
      if (rec[n] != cur) begin
        failures++;
        if (failures < 12) $display("FAIL sample %0d: recovered %0d, model %0d", n, rec[n], cur);
      end
      // reference rule applied to this output
      side = (y >= 0);
      if (have_prev && side != prev_side) armed = 1;
      if (!armed && (y > longint'(thr_high) || y < longint'(thr_low))) n_no_cross++;
      if (armed && y > longint'(thr_high)) begin
        if (cur == 1) n_repeat++;
        cur = 1; armed = 0;
      end else if (armed && y < longint'(thr_low)) begin
        if (cur == -1) n_repeat++;
        cur = -1; armed = 0;
      end
      prev_side = side; have_prev = 1;
    end
    ber = best_ber(dly);
  endtask

  initial begin
    real ber, sig_pow;
    int  dly;
    longint y, peak;
    int  peak_at, start;
    for (int k = 0; k < N; k++) f[k] = ref_coef(k, N, T, COEF_W);
    foreach (sym[m]) sym[m] = ($urandom % 2 == 1) ? 1 : -1;

    // A. single basis pulses among random samples: two positive pulses, the
    //    second repeating the symbol, then a negative one.
    do_reset();
    thr_high = 32'sd300000; thr_low = -32'sd300000; thr_mid = '0;
    start = 150;
    peak = 0; peak_at = -1;
    begin
      bit armed, prev_side, have_prev;
      int cur;
      armed = 1; have_prev = 0; prev_side = 0; cur = 0;
      for (int n = 0; n < 800; n++) begin
        int v;
        bit side;
        v = int'($urandom % 101) - 50;
        if (n >= start && n < start + N)
          v = ref_round(400.0 * ref_pulse(real'(n - start) / SPU));
        if (n >= 350 && n < 350 + N)
          v = ref_round(400.0 * ref_pulse(real'(n - 350) / SPU));
        if (n >= 550 && n < 550 + N)
          v = -ref_round(400.0 * ref_pulse(real'(n - 550) / SPU));
        step(v, y);
        if (n < 300 && y > peak) begin peak = y; peak_at = n; end
        side = (y >= 0);
        if (have_prev && side != prev_side) armed = 1;
        if (armed && y > longint'(thr_high)) begin
          if (cur == 1) n_repeat++;
        cur = 1; armed = 0;
        end else if (armed && y < longint'(thr_low)) begin
          if (cur == -1) n_repeat++;
        cur = -1; armed = 0;
        end
        prev_side = side; have_prev = 1;
      end
      checks++;
      if (!s_valid || s_rec) begin failures++; $display("FAIL pulse scene final symbol"); end
    end
    $display("scene A: peak %0d at sample %0d (pulse starts at %0d)", peak, peak_at, start);
    checks++;
    if (peak_at < start + N - 3 || peak_at > start + N + 1) begin
      failures++;
      $display("FAIL single pulse peak position");
    end
    checks++;
    if (n_pos != 2 || n_neg != 1) begin
      failures++;
      $display("FAIL pulse scene decisions: %0d positive, %0d negative (expected 2, 1)", n_pos, n_neg);
    end

    // E. one basis pulse in Gaussian noise of the pulse's own power (SNR 0 dB)
    do_reset();
    begin
      real pw;
      pw = 0.0;
      for (int n = 0; n < N; n++) pw += (400.0 * ref_pulse(real'(n) / SPU)) ** 2;
      pw = $sqrt(pw / real'(N));
      peak = 0; peak_at = -1;
      for (int n = 0; n < 400; n++) begin
        int  v;
        real g;
        g = gauss();
        v = ref_round(pw * g);
        if (n >= start && n < start + N) v += ref_round(400.0 * ref_pulse(real'(n - start) / SPU));
        step(clip(v), y);
        if (y > peak) begin peak = y; peak_at = n; end
      end
      $display("scene E: noise sd %f, peak %0d at sample %0d", pw, peak, peak_at);
      checks++;
      if (peak_at < start + N - 8 || peak_at > start + N + 8) begin
        failures++;
        $display("FAIL noisy single pulse peak position");
      end
    end

    // B. noiseless chaotic waveform
    run_chaos(180.0, 0.0, 0, ber, dly);
    $display("scene B: BER %f at delay %0d samples", ber, dly);
    checks++;
    if (ber > 0.0) begin failures++; $display("FAIL noiseless BER"); end

    // C. SNR 0 dB
    sig_pow = 0.0;
    for (int n = 0; n < int'(real'(NSYM) * SPU); n++) sig_pow += (180.0 * chaos(n)) ** 2;
    sig_pow = sig_pow / (real'(NSYM) * SPU);
    run_chaos(180.0, $sqrt(sig_pow), 0, ber, dly);
    $display("scene C: noise sd %f, BER %f at delay %0d samples", $sqrt(sig_pow), ber, dly);
    checks++;
    if (ber > 0.05) begin failures++; $display("FAIL BER at SNR 0 dB"); end

    // D. clipping burst
    run_chaos(120.0, 30.0, 1, ber, dly);
    $display("scene D: BER %f, clipped samples so far %0d", ber, n_clipped);

    $display("events: +1 decisions %0d, -1 decisions %0d", n_pos, n_neg);
    $display("excursion samples ignored (no midpoint crossing) %0d, same symbol detected again %0d",
             n_no_cross, n_repeat);
    $display("clipped input samples %0d", n_clipped);
    checks++;
    if (n_pos == 0 || n_neg == 0 || n_no_cross == 0 || n_repeat == 0 || n_clipped == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
