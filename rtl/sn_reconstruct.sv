// sn_reconstruct -- recovers the symbol sequence s_n from the matched filter
// output with three thresholds.
//
// A new symbol shows as the filter output rising above the high threshold or
// falling below the low one, but one excursion may last several samples and
// the output rings around the thresholds while s_n holds its value. The
// midpoint threshold separates one event from the next: a crossing of the
// midpoint (the output changing side between two samples) arms the detector,
// and an armed detector turns the first sample above the high (below the low)
// threshold into a decision +1 (-1) and disarms. The recovered symbol is the
// last decision. This rule is the paper's. The details are this design's: a
// side is y >= thr_mid or y < thr_mid; the detector starts armed; the
// thresholds are run-time inputs (the paper set them by inspection of the
// output).
//
// Interface: y_in and the thresholds are signed Y_W-bit values. decision is a
// signed two-bit +1/-1/0 per sample (a +1 may follow a +1: the same symbol
// detected again); s_rec is the recovered symbol (1 = +1, 0 = -1), valid once
// s_valid is high.
// Timing: all outputs are registered, one clock after the y_in sample they
// belong to.
module sn_reconstruct
  import rtmf_pkg::*;
#(
  parameter int Y_W = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [Y_W-1:0] y_in,
  input  logic signed [Y_W-1:0] thr_high,
  input  logic signed [Y_W-1:0] thr_mid,
  input  logic signed [Y_W-1:0] thr_low,
  output decision_e             decision,
  output logic                  s_rec,
  output logic                  s_valid
);

  logic side, prev_side, have_prev, armed;
  logic mid_cross, armed_now, fire_hi, fire_lo;

  always_comb begin
    side      = (y_in >= thr_mid);
    mid_cross     = have_prev && (side != prev_side);
    armed_now = armed || mid_cross;
    fire_hi   = armed_now && (y_in > thr_high);
    fire_lo   = armed_now && (y_in < thr_low) && !fire_hi;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev_side <= 1'b0;
      have_prev <= 1'b0;
      armed     <= 1'b1;
      s_rec     <= 1'b0;
      s_valid   <= 1'b0;
      decision  <= DEC_NONE;
    end else begin
      prev_side <= side;
      have_prev <= 1'b1;
      if (fire_hi) begin
        s_rec    <= 1'b1;
        s_valid  <= 1'b1;
        armed    <= 1'b0;
        decision <= DEC_POS;
      end else if (fire_lo) begin
        s_rec    <= 1'b0;
        s_valid  <= 1'b1;
        armed    <= 1'b0;
        decision <= DEC_NEG;
      end else begin
        armed    <= armed_now;
        decision <= DEC_NONE;
      end
    end
  end

  // A non-zero decision always names the symbol it has just set.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (decision == DEC_NONE || s_valid)
        else $error("sn_reconstruct: decision without a valid symbol");
      assert (decision != DEC_POS || s_rec)
        else $error("sn_reconstruct: +1 decision but symbol is -1");
      assert (decision != DEC_NEG || !s_rec)
        else $error("sn_reconstruct: -1 decision but symbol is +1");
    end
  end

endmodule
