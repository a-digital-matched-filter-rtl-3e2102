// tb_tap_delay_line -- checks the z^-1 chain at its full 100-tap size.
//
// Random samples are clocked in; after every clock each tap k must equal the
// sample applied k clocks earlier (0 before reset ends), tap 0 the present
// input. Reset in mid-stream must clear every delayed tap.
module tb_tap_delay_line;
  localparam int N = 100, W = 10;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [W-1:0] x_in = '0;
  logic signed [W-1:0] taps [N];
  logic signed [W-1:0] hist [N];   // hist[k] = input k clocks ago

  tap_delay_line #(.N_TAPS(N), .IN_W(W)) dut (.clk, .rst_n, .x_in, .taps);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int k = 0; k < N; k++) begin
      checks++;
      if (taps[k] !== hist[k]) begin
        failures++;
        if (failures < 10) $display("FAIL tap %0d = %0d expected %0d", k, taps[k], hist[k]);
      end
    end
  endtask

  initial begin
    foreach (hist[k]) hist[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 1000; n++) begin
      if (n == 600) rst_n = 1'b0;
      if (n == 602) rst_n = 1'b1;
      @(posedge clk);
      // model: shift (or clear) on this edge
      if (!rst_n) foreach (hist[k]) hist[k] = '0;
      else begin
        for (int k = N - 1; k >= 2; k--) hist[k] = hist[k-1];
        hist[1] = x_in;
      end
      #1;
      x_in = W'($urandom);
      hist[0] = x_in;
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
