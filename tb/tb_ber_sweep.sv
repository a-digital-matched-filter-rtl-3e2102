// tb_ber_sweep -- bit error rate of the receiver against Eb/N0, at the
// default size (100 taps over a 3-period basis pulse, 10-bit input).
//
// For each Eb/N0 point a fresh random symbol sequence is turned into the
// reverse-time chaotic waveform u(t) = sum_n s_n u_g(t - n), sampled at 100/3
// samples per period, scaled to 10 bits and given Gaussian noise of variance
// N0/2 per sample, where Eb is the measured signal energy of one symbol period.
// The recovered symbols are compared with the transmitted ones after the
// filter delay (the delay with the fewest errors). Thresholds are +-30 % of
// the filter's response to one full-scale pulse, midpoint 0.
// Noise peaks beyond the 10-bit range are clipped, as an ADC would. The
// points span the Eb/N0 axis of the paper's BER plots (-4 to 10 dB).
// Checks: the error rate falls as Eb/N0 grows (within a small tolerance for
// the finite sample), and it is below 1 % at the highest point.
module tb_ber_sweep;
  import tb_ref_pkg::*;
  localparam int  N = 100, COEF_W = 8;
  localparam real T = 3.0;
  localparam real SPU = real'(N) / T;
  localparam int  NSYM = 3000;
  localparam int  TAIL = 12;
  localparam int  NPTS = 8;
  localparam real EBN0_DB [NPTS] = '{-4.0, -2.0, 0.0, 2.0, 4.0, 6.0, 8.0, 10.0};
  localparam real AMP = 180.0;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [9:0]  adc_data = '0;
  logic signed [31:0] thr_high, thr_mid, thr_low, mf_out;
  rtmf_pkg::decision_e decision;
  logic s_rec, s_valid;

  int  sym [NSYM];
  int  rec [];
  real clean [];
  // u_g at multiples of 1/100 period: sample n of symbol m sits at
  // t = n/SPU - m = (3n - 100m)/100.
  real pulse_tab [TAIL * 100 + 100];

  rtmf_top dut (.clk, .rst_n, .adc_data, .thr_high, .thr_mid, .thr_low,
                .mf_out, .decision, .s_rec, .s_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (NPTS * (NSYM * 34 + 10) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  len;
    real ber [NPTS];
    longint ymax;
    len = int'(real'(NSYM) * SPU);
    rec = new[len];
    clean = new[len];
    foreach (pulse_tab[j]) pulse_tab[j] = ref_pulse(real'(j) / 100.0);
    ymax = 0;
    for (int k = 0; k < N; k++)
      ymax += longint'(ref_coef(k, N, T, COEF_W)) * ref_round(AMP * ref_pulse(real'(N - k) / SPU));
    thr_high = 32'(ymax * 3 / 10);
    thr_low  = -32'(ymax * 3 / 10);
    thr_mid  = '0;

    for (int p = 0; p < NPTS; p++) begin
      real eb, sd;
      int  best_err, best_d, tot;
      foreach (sym[m]) sym[m] = ($urandom % 2 == 1) ? 1 : -1;
      eb = 0.0;
      for (int n = 0; n < len; n++) begin
        int m0;
        real u;
        m0 = (3 * n) / 100;
        u = 0.0;
        for (int m = m0 - TAIL; m <= m0; m++)
          if (m >= 0) u += real'(sym[m]) * pulse_tab[3 * n - 100 * m];
        clean[n] = AMP * u;
        eb += clean[n] * clean[n];
      end
      eb = eb / real'(NSYM);                               // energy per symbol
      sd = $sqrt(eb / (2.0 * (10.0 ** (EBN0_DB[p] / 10.0)))); // sqrt(N0/2)

      rst_n = 1'b0;
      repeat (2) @(posedge clk);
      #1 rst_n = 1'b1;
      for (int n = 0; n < len; n++) begin
        int  v;
        real g;
        g = gauss();
        v = ref_round(clean[n] + sd * g);
        v = (v > 511) ? 511 : (v < -512) ? -512 : v;
        adc_data = 10'(v);
        @(posedge clk); #1;
        rec[n] = s_valid ? (s_rec ? 1 : -1) : 0;
      end

      best_err = NSYM; best_d = -1; tot = 0;
      for (int d = 0; d < 3 * N; d++) begin
        int err;
        err = 0; tot = 0;
        for (int m = 5; m < NSYM - 15; m++) begin
          int idx;
          idx = int'($floor(real'(m) * SPU + SPU / 2.0)) + d;
          tot++;
          if (rec[idx] != sym[m]) err++;
        end
        if (err < best_err) begin best_err = err; best_d = d; end
      end
      ber[p] = real'(best_err) / real'(tot);
      $display("Eb/N0 %4.1f dB: noise sd %7.2f, BER %f (%0d of %0d symbols), delay %0d samples",
               EBN0_DB[p], sd, ber[p], best_err, tot, best_d);
      if (p > 0) begin
        checks++;
        if (ber[p] > ber[p - 1] + 0.02) begin
          failures++;
          $display("FAIL BER rises from %f to %f", ber[p - 1], ber[p]);
        end
      end
    end
    checks++;
    if (ber[NPTS - 1] > 0.01 || ber[NPTS - 1] >= ber[0]) begin
      failures++;
      $display("FAIL BER at the highest Eb/N0 is %f", ber[NPTS - 1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
