// tb_fir_matched_filter -- checks the 100-tap matched filter at full size.
//
// 1. Impulse response: a single unit sample must bring out the coefficients
//    f[0], f[1], ... one per clock, starting exactly one clock after the
//    impulse is sampled, then zeros. The coefficients are compared with an
//    independently written model of the time-reversed basis pulse and with a
//    few values of the pulse worked out beforehand.
// 2. Random and full-scale inputs: every output is compared with a direct
//    convolution of the applied samples with the model coefficients.
module tb_fir_matched_filter;
  import tb_ref_pkg::*;
  localparam int  N = 100, IN_W = 10, ACC_W = 32, COEF_W = 8;
  localparam real T = 3.0;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [IN_W-1:0]  x_in = '0;
  logic signed [ACC_W-1:0] y_out;

  int f [N];
  int xs [$];            // applied samples, newest at the back

  fir_matched_filter #(.N_TAPS(N), .IN_W(IN_W), .ACC_W(ACC_W), .COEF_W(COEF_W),
                       .PULSE_LEN(T)) dut (.clk, .rst_n, .x_in, .y_out);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_y(longint exp, string what);
    checks++;
    if (longint'(y_out) != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: y=%0d expected %0d", what, y_out, exp);
    end
  endtask

  // Apply one sample, clock it, check the output against the convolution.
  task automatic step_conv(logic signed [IN_W-1:0] v);
    longint acc;
    x_in = v;
    xs.push_back(int'(v));
    @(posedge clk); #1;
    acc = 0;
    for (int k = 0; k < N && k < xs.size(); k++) acc += longint'(f[k]) * xs[xs.size() - 1 - k];
    expect_y(acc, "convolution");
  endtask

  initial begin
    for (int k = 0; k < N; k++) f[k] = ref_coef(k, N, T, COEF_W);
    // Known values of the quantised, time-reversed pulse.
    begin
      int sum_abs;
      sum_abs = 0;
      foreach (f[k]) sum_abs += (f[k] < 0) ? -f[k] : f[k];
      checks += 6;
      if (f[0] != 9 || f[48] != -24 || f[83] != 127 || f[88] != 106 || f[99] != 1)
        begin failures++; $display("FAIL reference coefficients"); end
      if (sum_abs != 3306) begin failures++; $display("FAIL sum |f| = %0d", sum_abs); end
    end

    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    expect_y(0, "after reset");

    // Impulse response and latency.
    x_in = 10'sd1;
    @(posedge clk); #1;
    x_in = '0;
    expect_y(f[0], "impulse tap 0 (latency one clock)");
    for (int k = 1; k < N + 5; k++) begin
      @(posedge clk); #1;
      expect_y((k < N) ? f[k] : 0, $sformatf("impulse tap %0d", k));
    end

    // Negative full-scale impulse.
    x_in = -10'sd512;
    @(posedge clk); #1;
    x_in = '0;
    expect_y(-512 * f[0], "neg impulse tap 0");
    for (int k = 1; k < N; k++) begin
      @(posedge clk); #1;
      expect_y(-512 * f[k], "neg impulse");
    end

    // Random samples against the convolution.
    for (int k = 0; k < N; k++) xs.push_back(0);
    for (int n = 0; n < 3000; n++) step_conv(IN_W'($urandom));
    // Worst case: each sample at the extreme that matches its coefficient's sign.
    for (int n = 0; n < 3 * N; n++)
      step_conv((f[(3 * N - 1 - n) % N] >= 0) ? 10'sd511 : -10'sd512);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
