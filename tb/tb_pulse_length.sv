// tb_pulse_length -- error rate against Eb/N0 for matched filters covering
// 3, 4 and 5 periods of the basis pulse.
//
// Three receivers run side by side on the same noisy chaotic waveform. All
// use the same sample spacing (100/3 samples per oscillator period), so the
// filters have 100, 133 and 167 taps (pulse lengths 3.0, 3.99 and 5.01
// periods). Each receiver's thresholds are +-30 % of its own response to one
// full pulse. Eb is the signal energy per symbol, N0/2 the noise variance per
// sample; samples are clipped at the 10-bit range.
// Checks: for every length the error rate falls from the lowest to the
// highest Eb/N0 point and is below 2 % at the highest point.
module tb_pulse_length;
  import tb_ref_pkg::*;
  localparam int  NL = 3;
  localparam int  NT [NL] = '{100, 133, 167};
  localparam real SPU = 100.0 / 3.0;
  localparam int  COEF_W = 8;
  localparam int  NSYM = 2000;
  localparam int  TAIL = 12;
  localparam int  NPTS = 4;
  localparam real EBN0_DB [NPTS] = '{0.0, 3.0, 6.0, 9.0};
  localparam real AMP = 180.0;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [9:0]  adc_data = '0;
  logic signed [31:0] thr_high [NL], thr_low [NL], mf_out [NL];
  logic signed [31:0] thr_mid = '0;
  rtmf_pkg::decision_e decision [NL];
  logic s_rec [NL], s_valid [NL];

  int  sym [NSYM];
  int  rec [NL][];
  real clean [];
  real pulse_tab [TAIL * 100 + 100];

  for (genvar i = 0; i < NL; i++) begin : g_rx
    rtmf_top #(.N_TAPS(NT[i]), .PULSE_LEN(real'(NT[i]) * 3.0 / 100.0)) dut (
      .clk, .rst_n, .adc_data,
      .thr_high (thr_high[i]), .thr_mid, .thr_low (thr_low[i]),
      .mf_out (mf_out[i]), .decision (decision[i]), .s_rec (s_rec[i]), .s_valid (s_valid[i])
    );
  end

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
    real ber [NL][NPTS];
    len = int'(real'(NSYM) * SPU);
    foreach (rec[i]) rec[i] = new[len];
    clean = new[len];
    foreach (pulse_tab[j]) pulse_tab[j] = ref_pulse(real'(j) / 100.0);
    for (int i = 0; i < NL; i++) begin
      longint ymax;
      real    tl;
      tl = real'(NT[i]) * 3.0 / 100.0;
      ymax = 0;
      for (int k = 0; k < NT[i]; k++)
        ymax += longint'(ref_coef(k, NT[i], tl, COEF_W)) *
                ref_round(AMP * ref_pulse(real'(NT[i] - k) / SPU));
      thr_high[i] = 32'(ymax * 3 / 10);
      thr_low[i]  = -32'(ymax * 3 / 10);
    end

    for (int p = 0; p < NPTS; p++) begin
      real eb, sd;
      foreach (sym[m]) sym[m] = ($urandom % 2 == 1) ? 1 : -1;
      eb = 0.0;
      for (int n = 0; n < len; n++) begin
        int  m0;
        real u;
        m0 = (3 * n) / 100;
        u = 0.0;
        for (int m = m0 - TAIL; m <= m0; m++)
          if (m >= 0) u += real'(sym[m]) * pulse_tab[3 * n - 100 * m];
        clean[n] = AMP * u;
        eb += clean[n] * clean[n];
      end
      eb = eb / real'(NSYM);
      sd = $sqrt(eb / (2.0 * (10.0 ** (EBN0_DB[p] / 10.0))));

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
        for (int i = 0; i < NL; i++) rec[i][n] = s_valid[i] ? (s_rec[i] ? 1 : -1) : 0;
      end

      for (int i = 0; i < NL; i++) begin
        int best_err, best_d, tot;
        best_err = NSYM; best_d = -1; tot = 0;
        for (int d = 0; d < 400; d++) begin
          int err;
          err = 0; tot = 0;
          for (int m = 5; m < NSYM - 20; m++) begin
            int idx;
            idx = int'($floor(real'(m) * SPU + SPU / 2.0)) + d;
            tot++;
            if (rec[i][idx] != sym[m]) err++;
          end
          if (err < best_err) begin best_err = err; best_d = d; end
        end
        ber[i][p] = real'(best_err) / real'(tot);
        $display("pulse length %4.2f (%0d taps), Eb/N0 %4.1f dB: BER %f (%0d of %0d), delay %0d",
                 real'(NT[i]) * 3.0 / 100.0, NT[i], EBN0_DB[p], ber[i][p], best_err, tot, best_d);
      end
    end
    for (int i = 0; i < NL; i++) begin
      checks++;
      if (ber[i][NPTS - 1] >= ber[i][0] || ber[i][NPTS - 1] > 0.02) begin
        failures++;
        $display("FAIL %0d taps: BER %f at the highest Eb/N0", NT[i], ber[i][NPTS - 1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
