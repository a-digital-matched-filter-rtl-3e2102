// fir_matched_filter -- direct-form FIR matched to the reverse-time chaos
// basis pulse.
//
// y[n] = sum_{k=0}^{N_TAPS-1} f[k] x[n-k], where f[k] is the basis pulse u_g
// reversed in time over PULSE_LEN oscillator periods and quantised to COEF_W
// bits (see rtmf_pkg). The structure follows the paper's block diagram: a
// tapped delay line, one multiplier-free SOPOT weight per tap, and a chain of
// adders running from f[0] to f[N-1]. All arithmetic is ACC_W (32) bits wide,
// as in the paper, which cannot overflow for 10-bit samples and 8-bit
// coefficients (needs at most IN_W + COEF_W + clog2(N_TAPS) = 25 bits).
//
// Paper: direct form, SOPOT weights, 100 taps, 10-bit input, 32-bit internal
// width, pulse length of 3 periods. Own choices: the coefficient word length,
// spreading the 100 taps over the whole 3-period pulse (33.3 samples per
// oscillator period), the registered output and the synchronous reset.
//
// Timing: one sample per clock. y_out after the clock edge that samples x[n]
// equals y[n] (one cycle of latency from x_in to y_out).
module fir_matched_filter #(
  parameter int  N_TAPS    = 100,
  parameter int  IN_W      = 10,
  parameter int  ACC_W     = 32,
  parameter int  COEF_W    = 8,
  parameter real PULSE_LEN = 3.0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  x_in,
  output logic signed [ACC_W-1:0] y_out
);

  logic signed [IN_W-1:0]  taps  [N_TAPS];
  logic signed [ACC_W-1:0] prod  [N_TAPS];
  logic signed [ACC_W-1:0] chain [N_TAPS];

  tap_delay_line #(.N_TAPS(N_TAPS), .IN_W(IN_W)) u_delay (
    .clk   (clk),
    .rst_n (rst_n),
    .x_in  (x_in),
    .taps  (taps)
  );

  for (genvar k = 0; k < N_TAPS; k++) begin : g_tap
    localparam int C = rtmf_pkg::mf_coef(k, N_TAPS, PULSE_LEN, COEF_W);
    sopot_weight #(.IN_W(IN_W), .OUT_W(ACC_W), .COEF_W(COEF_W), .COEF(C)) u_w (
      .x (taps[k]),
      .p (prod[k])
    );
  end

  // Adder chain of the block diagram: chain[k] = f[0]x[n] + ... + f[k]x[n-k].
  always_comb begin
    chain[0] = prod[0];
    for (int k = 1; k < N_TAPS; k++) chain[k] = chain[k-1] + prod[k];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) y_out <= '0;
    else        y_out <= chain[N_TAPS-1];
  end

endmodule
