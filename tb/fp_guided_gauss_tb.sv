// fp_guided_gauss_tb: filters random 30 x 30 frames, each pixel carrying a random
// orientation, and compares interior pixels with a reference computed here: a real-valued
// 5 x 5 Gaussian (sigma 1), then the 17-tap line Gaussian (sigma 4) sampled along the
// orientation with nearest-neighbour rounding (one pixel per column for near-horizontal
// angles, one per row for near-vertical ones). Also checks the hwind/vwind selection and
// that theta is passed through.
module fp_guided_gauss_tb;
  localparam int W = 30, H = 30, T = 17, RT = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nh = 0, nv = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic in_valid, out_valid, hw; logic [7:0] din, dout; logic [6:0] tin, tout;
  fp_guided_gauss #(.W(W), .H(H)) dut (.clk, .rst_n, .in_valid, .in_pix(din), .in_theta(tin),
    .out_valid, .out_pix(dout), .out_theta(tout), .out_hwind(hw));
  int img [H][W]; int ang [H][W]; real pre [H][W];
  int nout;
  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y, a; real th, c, s, acc, wsum;
    x = nout % W; y = nout / W; a = ang[y][x];
    check(tout == 7'(a), "theta passed");
    if (x >= RT + 2 && x < W - RT - 2 && y >= RT + 2 && y < H - RT - 2) begin
      th = a * 3.14159265358979 / 128.0; c = $cos(th); s = $sin(th);
      acc = 0; wsum = 0;
      for (int k = -RT; k <= RT; k++) begin
        int dx, dy; real w;
        if ((c < 0 ? -c : c) >= (s < 0 ? -s : s)) begin dx = k; dy = int'($floor(k * s / c + 0.5)); end
        else begin dy = k; dx = int'($floor(k * c / s + 0.5)); end
        if (dx > RT) dx = RT; if (dx < -RT) dx = -RT; if (dy > RT) dy = RT; if (dy < -RT) dy = -RT;
        w = $exp(-(k * k) / 32.0);
        acc += w * pre[y + dy][x + dx]; wsum += w;
      end
      acc = acc / wsum;
      check((real'(dout) - acc) <= 2.5 && (acc - real'(dout)) <= 2.5,
            $sformatf("(%0d,%0d) a=%0d got %0d exp %f", x, y, a, dout, acc));
      check(hw == ((c < 0 ? -c : c) >= (s < 0 ? -s : s)) || a == 32 || a == 96, "window select");
      if (hw) nh++; else nv++;
    end
    nout++;
  end
  initial begin
    in_valid = 0; din = 0; tin = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      nout = 0;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        img[y][x] = $urandom_range(0, 255); ang[y][x] = $urandom_range(0, 127);
      end
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        real acc, ws;
        acc = 0; ws = 0;
        for (int dy = -2; dy <= 2; dy++) for (int dx = -2; dx <= 2; dx++) begin
          int xx, yy; real w;
          xx = x + dx; yy = y + dy;
          if (xx < 0 || yy < 0 || xx >= W || yy >= H) continue;
          w = $exp(-(dx * dx + dy * dy) / 2.0);
          acc += w * img[yy][xx]; ws += w;
        end
        pre[y][x] = acc / ws;
      end
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        @(negedge clk); in_valid = 1; din = 8'(img[y][x]); tin = 7'(ang[y][x]);
      end
      @(negedge clk); in_valid = 0;
      wait (nout == W * H);
      repeat (5) @(posedge clk);
    end
    check(nh > 0 && nv > 0, "both hwind and vwind used");
    $display("hwind %0d vwind %0d", nh, nv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
