// iris_enhance_tb: a 30 x 16 textured image (reduced sigmas 2 and 1) is enhanced and every
// output is compared with a real-arithmetic model of the same chain (background Gaussian,
// subtraction, power law, contrast Gaussian, clip to [50, 255], 128 + 128 d / c) with a
// tolerance of 4 grey levels for fixed-point rounding; the row tag must travel unchanged.
module iris_enhance_tb;
  localparam int W = 30, H = 16, R1 = 4, R2 = 2;
  localparam real S1 = 2.0, S2 = 1.0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic in_valid, out_valid; logic [7:0] din, opix; logic [15:0] itag, otag;
  iris_enhance #(.W(W), .H(H), .SIGMA1(S1), .R1(R1), .SIGMA2(S2), .R2(R2)) dut (.clk, .rst_n, .in_valid,
    .in_pix(din), .in_tag(itag), .out_valid, .out_pix(opix), .out_tag(otag));
  real img [H][W], dd [H][W], pw [H][W], tmp [H][W], bg [H][W], ct [H][W], expo [H][W];
  real w1 [2*R1+1], w2 [2*R2+1];
  int nout, nsat;
  // separable Gaussian, vertical then horizontal, taps outside the image replaced by the centre
  task automatic gauss(input real wt [], input int r, input real src [H][W], output real dst [H][W]);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      real s; int yy;
      s = 0;
      for (int k = -r; k <= r; k++) begin
        yy = y + k;
        s += wt[k+r] * ((yy < 0 || yy >= H) ? src[y][x] : src[yy][x]);
      end
      tmp[y][x] = s;
    end
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      real s; int xx;
      s = 0;
      for (int k = -r; k <= r; k++) begin
        xx = x + k;
        s += wt[k+r] * ((xx < 0 || xx >= W) ? tmp[y][x] : tmp[y][xx]);
      end
      dst[y][x] = s;
    end
  endtask
  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y; real e;
    x = nout % W; y = nout / W; e = expo[y][x];
    check(opix >= e - 4.0 && opix <= e + 4.0, $sformatf("(%0d,%0d) got %0d exp %f", x, y, opix, e));
    check(int'(otag) == y, "tag");
    if (opix == 0 || opix == 255) nsat++;
    nout++;
  end
  initial begin
    real t, w1d [], w2d [];
    w1d = new[2*R1+1]; w2d = new[2*R2+1];
    t = 0; for (int k = -R1; k <= R1; k++) begin w1d[k+R1] = $exp(-(k*k) / (2*S1*S1)); t += w1d[k+R1]; end
    for (int k = 0; k <= 2*R1; k++) w1d[k] /= t;
    t = 0; for (int k = -R2; k <= R2; k++) begin w2d[k+R2] = $exp(-(k*k) / (2*S2*S2)); t += w2d[k+R2]; end
    for (int k = 0; k <= 2*R2; k++) w2d[k] /= t;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      img[y][x] = real'(int'(100.0 + 50.0 * $sin(x * 0.9) * $cos(y * 0.4) + $urandom_range(0, 30) + 0.4 * x));
    gauss(w1d, R1, img, bg);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      real m;
      dd[y][x] = img[y][x] - real'(int'($floor(bg[y][x] + 0.5)));
      m = (dd[y][x] < 0) ? -dd[y][x] : dd[y][x];
      pw[y][x] = real'(int'(255.0 * $pow(m / 255.0, 0.75) + 0.5));
    end
    gauss(w2d, R2, pw, ct);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      real c, o;
      c = ct[y][x]; if (c < 50.0) c = 50.0; if (c > 255.0) c = 255.0;
      o = 128.0 + 128.0 * dd[y][x] / c;
      expo[y][x] = (o < 0) ? 0 : (o > 255) ? 255 : o;
    end
    in_valid = 0; din = 0; itag = 0; nout = 0; nsat = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      @(negedge clk); in_valid = 1; din = 8'(int'(img[y][x])); itag = 16'(y);
    end
    @(negedge clk); in_valid = 0;
    wait (nout == W * H);
    $display("saturated outputs: %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
