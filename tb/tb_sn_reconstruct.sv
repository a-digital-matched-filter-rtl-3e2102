// tb_sn_reconstruct -- checks the three-threshold symbol reconstruction.
//
// A directed sequence walks through each rule: the first excursion, an
// excursion with no midpoint crossing (ignored), a crossing followed by an
// excursion that repeats the current symbol (a new decision), a crossing
// that is not followed by an excursion, and values equal to the thresholds. Then
// oscillating inputs with random amplitude and offset, under symmetric and
// asymmetric thresholds, are compared sample by sample with a reference
// model. Outputs are checked one clock after each input sample.
module tb_sn_reconstruct;
  import rtmf_pkg::*;
  localparam int Y_W = 32;

  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_ignored = 0, n_repeat = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [Y_W-1:0] y_in = '0, thr_high, thr_mid, thr_low;
  decision_e decision;
  logic s_rec, s_valid;

  // reference model state
  bit m_armed, m_prev, m_have_prev, m_s, m_valid;
  int m_dec;

  sn_reconstruct #(.Y_W(Y_W)) dut (.clk, .rst_n, .y_in, .thr_high, .thr_mid, .thr_low,
                                   .decision, .s_rec, .s_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void model_reset();
    m_armed = 1; m_prev = 0; m_have_prev = 0; m_s = 0; m_valid = 0; m_dec = 0;
  endfunction

  function automatic void model_step(int y);
    bit side, want_pos, want_neg;
    side = (y >= int'(thr_mid));
    if (m_have_prev && side != m_prev) m_armed = 1;
    m_prev = side;
    m_have_prev = 1;
    want_pos = y > int'(thr_high);
    want_neg = y < int'(thr_low);
    m_dec = 0;
    if (m_armed && want_pos) begin
      if (m_valid && m_s) n_repeat++;
      m_dec = 1; m_s = 1; m_valid = 1; m_armed = 0;
    end else if (m_armed && want_neg) begin
      if (m_valid && !m_s) n_repeat++;
      m_dec = -1; m_s = 0; m_valid = 1; m_armed = 0;
    end else if (want_pos || want_neg) n_ignored++;
  endfunction

  task automatic apply(int y, int exp_dec = 2);
    y_in = Y_W'(y);
    model_step(y);
    @(posedge clk); #1;
    checks++;
    if ($signed(decision) != m_dec || s_valid != m_valid || (m_valid && s_rec != m_s)) begin
      failures++;
      if (failures < 12)
        $display("FAIL y=%0d dec=%0d (model %0d) s=%0b/%0b valid=%0b/%0b", y,
                 $signed(decision), m_dec, s_rec, m_s, s_valid, m_valid);
    end
    if (exp_dec != 2) begin
      checks++;
      if (m_dec != exp_dec) begin
        failures++;
        $display("FAIL directed y=%0d: decision %0d expected %0d", y, m_dec, exp_dec);
      end
    end
    if (m_dec == 1) n_pos++;
    if (m_dec == -1) n_neg++;
  endtask

  initial begin
    thr_high = 1000; thr_mid = 0; thr_low = -1000;
    model_reset();
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (s_valid || decision != DEC_NONE) begin failures++; $display("FAIL reset state"); end

    // Directed rules.
    apply(200, 0);      // inside the band
    apply(1500, 1);     // first excursion: +1
    apply(1800, 0);     // still high
    apply(300, 0);
    apply(1500, 0);     // no midpoint crossing: ignored
    apply(-200, 0);     // crossing: armed
    apply(1600, 1);     // crossing again: the same symbol detected again
    apply(-1500, -1);   // still armed: -1
    apply(-300, 0);
    apply(-1400, 0);    // no crossing: ignored
    apply(100, 0);      // crossing, no excursion
    apply(900, 0);      // below high: nothing
    apply(1001, 1);     // armed: +1
    apply(1000, 0);     // equal to high is not above it
    apply(-1000, 0);    // equal to low is not below it (crossing arms)
    apply(-1001, -1);

    // Random oscillations, symmetric then asymmetric thresholds.
    for (int phase = 0; phase < 2; phase++) begin
      if (phase == 1) begin thr_high = 900; thr_mid = 150; thr_low = -600; end
      for (int seg = 0; seg < 200; seg++) begin
        real amp, off, ph;
        int  len;
        amp = real'($urandom % 2500);
        off = real'(int'($urandom % 3001) - 1500);
        ph  = real'($urandom % 628) / 100.0;
        len = 10 + $urandom % 60;
        for (int n = 0; n < len; n++)
          apply(int'(off + amp * $sin(ph + 6.2831853 * real'(n) / 23.0)));
      end
    end

    // Reset in the middle clears the symbol.
    rst_n = 1'b0;
    @(posedge clk); #1;
    rst_n = 1'b1;
    model_reset();
    checks++;
    if (s_valid || decision != DEC_NONE) begin failures++; $display("FAIL second reset"); end

    $display("decisions +1: %0d, -1: %0d, repeated symbol: %0d, excursion samples ignored: %0d",
             n_pos, n_neg, n_repeat, n_ignored);
    checks++;
    if (n_pos < 10 || n_neg < 10 || n_ignored < 10 || n_repeat < 10) begin
      failures++;
      $display("FAIL a rule was not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
