// gauss_sep_tb: filters two random 14 x 9 frames and compares every output pixel, in
// raster order, with a real-valued separable Gaussian (border taps replaced by the
// centre sample) computed here; the side channel must return the pixel's own value.
module gauss_sep_tb;
  localparam int W = 14, H = 9, R = 2;
  localparam real SIG = 1.0;
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

  logic in_valid; logic signed [9:0] din; logic [7:0] side;
  logic out_valid; logic signed [9:0] dout; logic [7:0] oside; logic [15:0] ox, oy;
  gauss_sep #(.DW(10), .SW(8), .SIGMA(SIG), .R(R), .W(W), .H(H)) dut (
    .clk, .rst_n, .in_valid, .in_data(din), .in_side(side),
    .out_valid, .out_data(dout), .out_side(oside), .out_x(ox), .out_y(oy));

  int img [H][W];
  real wt [2*R+1];
  int nout = 0;

  function automatic real vpass(int x, int y);
    real s;
    int yy;
    s = 0;
    for (int k = -R; k <= R; k++) begin
      yy = y + k;
      s += wt[k+R] * ((yy < 0 || yy >= H) ? img[y][x] : img[yy][x]);
    end
    return s;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y; real s, c;
    x = nout % W; y = (nout / W) % H;
    c = vpass(x, y); s = 0;
    for (int k = -R; k <= R; k++) begin
      int xx;
      xx = x + k;
      s += wt[k+R] * ((xx < 0 || xx >= W) ? c : vpass(xx, y));
    end
    check(ox == x && oy == y, "position");
    check(((real'(dout) - s) <= 1.01 && (s - real'(dout)) <= 1.01), $sformatf("(%0d,%0d) got %0d exp %f", x, y, dout, s));
    check(oside == 8'(img[y][x]), "side channel");
    nout++;
  end

  initial begin
    real t;
    t = 0;
    for (int k = -R; k <= R; k++) begin wt[k+R] = $exp(-(k*k) / (2*SIG*SIG)); t += wt[k+R]; end
    for (int k = 0; k <= 2*R; k++) wt[k] /= t;
    in_valid = 0; din = 0; side = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = $urandom_range(0, 255);
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        if ($urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
        @(negedge clk); in_valid = 1; din = 10'(img[y][x]); side = 8'(img[y][x]);
      end
      @(negedge clk); in_valid = 0;
      wait (nout == (f + 1) * W * H);
      repeat (5) @(posedge clk);
    end
    check(nout == 2 * W * H, "output count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
