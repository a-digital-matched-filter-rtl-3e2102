// rtmf_top -- receiver for reverse-time chaotic signals: FIR matched filter
// followed by s_n reconstruction.
//
// 10-bit samples of the received waveform (from an external ADC, one per
// clock) enter the direct-form SOPOT FIR filter matched to the reverse-time
// basis pulse; its 32-bit output is compared with three run-time thresholds to
// rebuild the transmitted symbol sequence s_n. The filter follows the paper;
// putting the threshold post-processing into hardware behind it is this
// design's reading of the paper's receiver.
//
// Timing: mf_out is y[n] one clock after adc_data carries x[n]; decision, s_rec
// and s_valid follow mf_out by one more clock. The paper clocks the filter at
// 180 MHz.
module rtmf_top
  import rtmf_pkg::*;
#(
  parameter int  N_TAPS    = 100,
  parameter int  IN_W      = 10,
  parameter int  ACC_W     = 32,
  parameter int  COEF_W    = 8,
  parameter real PULSE_LEN = 3.0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  adc_data,
  input  logic signed [ACC_W-1:0] thr_high,
  input  logic signed [ACC_W-1:0] thr_mid,
  input  logic signed [ACC_W-1:0] thr_low,
  output logic signed [ACC_W-1:0] mf_out,
  output decision_e               decision,
  output logic                    s_rec,
  output logic                    s_valid
);

  fir_matched_filter #(
    .N_TAPS    (N_TAPS),
    .IN_W      (IN_W),
    .ACC_W     (ACC_W),
    .COEF_W    (COEF_W),
    .PULSE_LEN (PULSE_LEN)
  ) u_fir (
    .clk   (clk),
    .rst_n (rst_n),
    .x_in  (adc_data),
    .y_out (mf_out)
  );

  sn_reconstruct #(.Y_W(ACC_W)) u_rec (
    .clk      (clk),
    .rst_n    (rst_n),
    .y_in     (mf_out),
    .thr_high (thr_high),
    .thr_mid  (thr_mid),
    .thr_low  (thr_low),
    .decision (decision),
    .s_rec    (s_rec),
    .s_valid  (s_valid)
  );

endmodule
