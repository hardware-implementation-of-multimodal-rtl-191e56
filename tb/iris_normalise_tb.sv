// iris_normalise_tb: an 80 x 60 eye image whose value is a smooth function of position is
// served through a one-cycle synchronous memory model; the unwrapped NA = 36 by NR = 8 image
// around a pupil at (40, 30) of radius 6 is compared with a real-arithmetic bilinear sample
// (tolerance 2), and the output rate must be one pixel every six cycles.
module iris_normalise_tb;
  localparam int W = 80, H = 60, NA = 36, NR = 8;
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
  logic start, out_valid, done, busy; logic [9:0] rx, ry; logic [7:0] rdata, opix;
  iris_normalise #(.W(W), .H(H), .NA(NA), .NR(NR)) dut (.clk, .rst_n, .start, .cx(10'd40), .cy(10'd30),
    .rp(10'd6), .rx, .ry, .rdata, .out_valid, .out_pix(opix), .done, .busy);
  function automatic real f(real x, real y);
    return 128.0 + 60.0 * $sin(x / 5.0) + 40.0 * $cos(y / 7.0);
  endfunction
  int img [H][W];
  initial for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = int'(f(x, y));
  always @(posedge clk) rdata <= 8'(img[ry][rx]);
  int nout, last_t, ndone;
  always @(posedge clk) if (rst_n && out_valid) begin
    int k, a, x0, y0; real xs, ys, fx, fy, v, th;
    k = nout / NA; a = nout % NA;
    th = 2.0 * 3.14159265358979 * a / NA;
    xs = 40.0 + (6 + k) * $cos(th); ys = 30.0 + (6 + k) * $sin(th);
    x0 = int'($floor(xs)); y0 = int'($floor(ys)); fx = xs - x0; fy = ys - y0;
    v = (1-fy) * ((1-fx) * img[y0][x0] + fx * img[y0][x0+1])
      + fy * ((1-fx) * img[y0+1][x0] + fx * img[y0+1][x0+1]);
    check(opix >= v - 2.0 && opix <= v + 2.0, $sformatf("k=%0d a=%0d got %0d exp %f", k, a, opix, v));
    if (nout > 0) check($time - last_t == 60, "six cycles per pixel");
    last_t = $time;
    nout++;
  end
  always @(posedge clk) if (rst_n && done) ndone++;
  initial begin
    start = 0; nout = 0; ndone = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    check(busy, "busy while unwrapping");
    wait (ndone == 1);
    @(negedge clk);
    check(nout == NA * NR, $sformatf("pixel count %0d", nout));
    check(!busy, "idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
