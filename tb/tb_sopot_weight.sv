// tb_sopot_weight -- checks the shift-and-add constant multiplier.
//
// Ten instances with coefficients covering zero, +-1, the extremes of an 8-bit
// word and values with long runs of ones are driven with random and extreme
// 10-bit samples; every product is compared with an ordinary multiplication.
// The canonical signed-digit form is also checked to use at most
// ceil((COEF_W+1)/2) non-zero terms for each coefficient.
module tb_sopot_weight;
  localparam int IN_W = 10, OUT_W = 32, COEF_W = 8, NC = 10;
  localparam int COEFS [NC] = '{0, 1, -1, 127, -128, 85, -85, 3, -93, 119};

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic signed [IN_W-1:0]  x;
  logic signed [OUT_W-1:0] p [NC];

  for (genvar i = 0; i < NC; i++) begin : g_dut
    sopot_weight #(.IN_W(IN_W), .OUT_W(OUT_W), .COEF_W(COEF_W), .COEF(COEFS[i])) dut (
      .x (x), .p (p[i])
    );
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    #1;
    for (int i = 0; i < NC; i++) begin
      checks++;
      if (p[i] !== OUT_W'(COEFS[i] * int'(x))) begin
        failures++;
        if (failures < 10) $display("FAIL coef=%0d x=%0d p=%0d", COEFS[i], x, p[i]);
      end
    end
  endtask

  initial begin
    // Term count of the canonical form.
    for (int i = 0; i < NC; i++) begin
      int terms;
      terms = $countones(rtmf_pkg::csd_pos(COEFS[i])) + $countones(rtmf_pkg::csd_neg(COEFS[i]));
      checks++;
      if (terms > (COEF_W + 2) / 2) begin
        failures++;
        $display("FAIL coef=%0d uses %0d terms", COEFS[i], terms);
      end
    end
    x = 10'sd0;       check_all();
    x = 10'sd511;     check_all();
    x = -10'sd512;    check_all();
    x = -10'sd1;      check_all();
    for (int n = 0; n < 2000; n++) begin
      @(posedge clk);
      x = IN_W'($urandom);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
