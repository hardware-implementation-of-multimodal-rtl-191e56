// fp_orientation_tb: feeds 40 x 40 frames of straight sinusoidal ridges at several known
// angles and checks that the estimated ridge orientation in the interior (away from the
// border effects of the smoothing windows) is within 3 units (4.2 degrees) of the true
// ridge direction. The sigma-7 smoothing is reduced to sigma 2 to keep the frame small.
module fp_orientation_tb;
  localparam int W = 40, H = 40;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic in_valid, out_valid; logic [7:0] din; logic [6:0] th;
  fp_orientation #(.W(W), .H(H), .SIGMA2(2.0), .R2(4)) dut (
    .clk, .rst_n, .in_valid, .in_pix(din), .out_valid, .out_theta(th));
  int nout, expect_th;
  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y, d;
    x = nout % W; y = nout / W;
    if (x >= 10 && x < W - 10 && y >= 10 && y < H - 10) begin
      d = (int'(th) - expect_th + 128) % 128; if (d > 64) d = 128 - d;
      check(d <= 3, $sformatf("(%0d,%0d) theta %0d expected %0d", x, y, th, expect_th));
    end
    nout++;
  end
  initial begin
    int angles [4] = '{0, 30, 75, 120};
    in_valid = 0; din = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (angles[i]) begin
      real ga, ridge;
      // gradient direction ga; ridges run perpendicular to it
      ga = angles[i] * 3.14159265358979 / 180.0;
      ridge = angles[i] + 90.0; if (ridge >= 180.0) ridge -= 180.0;
      expect_th = int'(ridge / 180.0 * 128.0 + 0.5) % 128;
      nout = 0;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        @(negedge clk); in_valid = 1;
        din = 8'(int'(128.0 + 100.0 * $cos(2.0 * 3.14159265358979 * (x * $cos(ga) + y * $sin(ga)) / 8.0)));
      end
      @(negedge clk); in_valid = 0;
      wait (nout == W * H);
      repeat (10) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
