// iris_preproc_tb: a 30 x 24 frame with a dark bowl-shaped disc on a textured background
// is pre-processed (sigma reduced to 1.5, support 3); every output bit is compared with the
// sign of (pixel - Gaussian mean) computed here in real arithmetic, skipping pixels whose
// difference is within rounding distance of zero.
module iris_preproc_tb;
  localparam int W = 30, H = 24, R = 3;
  localparam real SIG = 1.5;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, ones = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic in_valid, out_valid, ob; logic [7:0] din;
  iris_preproc #(.W(W), .H(H), .SIGMA(SIG), .R(R)) dut (.clk, .rst_n, .in_valid, .in_pix(din),
    .out_valid, .out_bit(ob));
  int img [H][W]; real wt [2*R+1]; int nout;
  function automatic real vp(int x, int y);
    real s; s = 0;
    for (int k = -R; k <= R; k++) s += wt[k+R] * ((y+k < 0 || y+k >= H) ? img[y][x] : img[y+k][x]);
    return s;
  endfunction
  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y; real m, c, d;
    x = nout % W; y = nout / W;
    c = vp(x, y); m = 0;
    for (int k = -R; k <= R; k++) m += wt[k+R] * ((x+k < 0 || x+k >= W) ? c : vp(x+k, y));
    d = img[y][x] - m;
    if (d > 1.5 || d < -1.5) check(ob == (d < 0), $sformatf("(%0d,%0d) d=%f got %0d", x, y, d, ob));
    ones += ob;
    nout++;
  end
  initial begin
    real t;
    t = 0;
    for (int k = -R; k <= R; k++) begin wt[k+R] = $exp(-(k*k) / (2*SIG*SIG)); t += wt[k+R]; end
    for (int k = 0; k <= 2*R; k++) wt[k] /= t;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      int r2;
      r2 = (x - 15) * (x - 15) + (y - 12) * (y - 12);
      img[y][x] = (r2 < 49) ? 10 + r2 : 120 + $urandom_range(0, 40);
    end
    nout = 0; in_valid = 0; din = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      @(negedge clk); in_valid = 1; din = 8'(img[y][x]);
    end
    @(negedge clk); in_valid = 0;
    wait (nout == W * H);
    check(ones > 30, "dark disc detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
