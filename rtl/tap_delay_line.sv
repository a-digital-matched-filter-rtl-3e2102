// tap_delay_line -- the z^-1 chain of a direct-form FIR filter.
//
// N_TAPS-1 registers in series, one sample clock each, as in the paper's block
// diagram where every unit delay is a bank of D flip-flops clocked at the
// sample rate. taps[k] is x[n-k]: taps[0] is the undelayed input x_in itself
// (combinational), taps[k] for k >= 1 is the input of k clocks ago.
// Reset (synchronous, active low) clears every stage; reset is this design's
// choice, the paper does not discuss it.
module tap_delay_line #(
  parameter int N_TAPS = 100,
  parameter int IN_W   = 10
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] x_in,
  output logic signed [IN_W-1:0] taps [N_TAPS]
);

  if (N_TAPS < 3) begin : g_check
    $error("tap_delay_line: N_TAPS must be at least 3");
  end

  // Stage k (1 .. N_TAPS-1) holds x[n-k]; a packed vector maps to flip-flops.
  logic [N_TAPS-1:1][IN_W-1:0] dly;

  always_ff @(posedge clk) begin
    if (!rst_n) dly <= '0;
    else        dly <= {dly[N_TAPS-2:1], x_in};
  end

  always_comb begin
    taps[0] = x_in;
    for (int k = 1; k < N_TAPS; k++) taps[k] = $signed(dly[k]);
  end

endmodule
