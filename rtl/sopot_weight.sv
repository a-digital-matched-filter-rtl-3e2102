// sopot_weight -- multiplier-free constant multiplication p = COEF * x.
//
// One FIR weight f[k]. The constant is decomposed at elaboration into a sum of
// signed powers of two (SOPOT) in canonical signed-digit form,
// COEF = sum_i a_i 2^i with a_i in {-1, 0, +1} and no two adjacent non-zero
// digits, so the product is a handful of left shifts of the sign-extended
// sample that are added or subtracted. The paper specifies the SOPOT form and
// that multiplications become shifts; the particular decomposition (CSD) is
// this design's choice. A zero coefficient gives a constant-zero product; the
// default, 127, is the largest coefficient of the matched filter.
//
// Interface: x is a signed IN_W-bit sample, p the signed OUT_W-bit product.
// Timing: purely combinational.
module sopot_weight #(
  parameter int IN_W   = 10,
  parameter int OUT_W  = 32,
  parameter int COEF_W = 8,
  parameter int COEF   = 127
) (
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] p
);

  localparam logic [31:0] POS_ALL = rtmf_pkg::csd_pos(COEF);
  localparam logic [31:0] NEG_ALL = rtmf_pkg::csd_neg(COEF);
  localparam logic [COEF_W:0] POS = POS_ALL[COEF_W:0];
  localparam logic [COEF_W:0] NEG = NEG_ALL[COEF_W:0];

  if (COEF > (1 << (COEF_W - 1)) - 1 || COEF < -(1 << (COEF_W - 1))) begin : g_range
    $error("sopot_weight: COEF does not fit in COEF_W bits");
  end

  logic signed [OUT_W-1:0] xe;
  assign xe = OUT_W'(x);

  always_comb begin
    logic signed [OUT_W-1:0] acc;
    acc = '0;
    for (int i = 0; i <= COEF_W; i++) begin
      if (POS[i]) acc = acc + (xe <<< i);
      if (NEG[i]) acc = acc - (xe <<< i);
    end
    p = acc;
  end

endmodule
