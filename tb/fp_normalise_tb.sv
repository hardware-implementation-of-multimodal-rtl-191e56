// fp_normalise_tb: a 16 x 12 frame (random texture in the top half, a flat patch in the
// bottom half) is normalised with a 3 x 3 window; every output is compared with a
// real-valued evaluation of 128 + 64 * M * (I - mean) / std, M = 1 - exp(-var / 2C^2),
// computed here. Flat areas must come out at 128.
module fp_normalise_tb;
  localparam int W = 16, H = 12, K = 3;
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
  logic in_valid, out_valid; logic [7:0] din, dout;
  fp_normalise #(.W(W), .H(H), .K(K)) dut (.clk, .rst_n, .in_valid, .in_pix(din), .out_valid, .out_pix(dout));
  int img [H][W];
  int nout;
  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y; real s, ss, m, v, e, mm, c2; int n;
    x = nout % W; y = nout / W;
    s = 0; ss = 0; n = 0;
    for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++) begin
      int xx, yy, p;
      xx = x + dx; yy = y + dy;
      p = (xx < 0 || yy < 0 || xx >= W || yy >= H) ? img[y][x] : img[yy][xx];
      s += p; ss += real'(p) * p; n++;
    end
    m = s / n; v = ss / n - m * m; if (v < 0) v = 0;
    c2 = 2.0 * (0.3 * 255) * (0.3 * 255);
    mm = 1.0 - $exp(-v / c2);
    e = (v < 1) ? 128 : 128 + 64.0 * (img[y][x] - m) / $sqrt(v) * mm;
    if (e < 0) e = 0; if (e > 255) e = 255;
    check((real'(dout) - e) <= 4.0 && (e - real'(dout)) <= 4.0,
          $sformatf("(%0d,%0d) got %0d exp %f", x, y, dout, e));
    nout++;
  end
  initial begin
    nout = 0; in_valid = 0; din = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      img[y][x] = (y < 6) ? $urandom_range(0, 255) : 90;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      @(negedge clk); in_valid = 1; din = 8'(img[y][x]);
    end
    @(negedge clk); in_valid = 0;
    repeat (200) @(posedge clk);
    check(nout == W * H, "output count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
