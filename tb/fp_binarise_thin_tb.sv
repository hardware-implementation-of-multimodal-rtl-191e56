// fp_binarise_thin_tb: a 24 x 20 grey frame with thick dark bars and random specks is
// binarised and thinned (NPASS = 3) and compared bit for bit with a frame-at-a-time
// reference of the same threshold and parallel Zhang-Suen sub-iterations computed here.
// Also checks that the bars end up one pixel thick in their middle and that the side
// value travels with its pixel.
module fp_binarise_thin_tb;
  localparam int W = 24, H = 20, NP = 3;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic in_valid, out_valid, ob; logic [7:0] din; logic [6:0] sin, sout; logic [31:0] del;
  fp_binarise_thin #(.W(W), .H(H), .NPASS(NP)) dut (.clk, .rst_n, .in_valid, .in_pix(din),
    .in_side(sin), .out_valid, .out_bit(ob), .out_side(sout), .deleted(del));
  int img [H][W]; bit b [H][W]; bit res [H][W];
  int nout;
  function automatic bit rid(int x, int y);   // ridge indicator with background padding
    if (x < 0 || y < 0 || x >= W || y >= H) return 0;
    return !b[y][x];
  endfunction
  task automatic zs(int sub);
    bit kill [H][W];
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      bit p[10]; int bn, an;
      p[1] = rid(x, y); p[2] = rid(x, y-1); p[3] = rid(x+1, y-1); p[4] = rid(x+1, y);
      p[5] = rid(x+1, y+1); p[6] = rid(x, y+1); p[7] = rid(x-1, y+1); p[8] = rid(x-1, y);
      p[9] = rid(x-1, y-1);
      bn = 0; an = 0;
      for (int i = 2; i <= 9; i++) bn += p[i];
      for (int i = 2; i <= 9; i++) if (!p[i] && p[i == 9 ? 2 : i + 1]) an++;
      kill[y][x] = p[1] && bn >= 2 && bn <= 6 && an == 1 &&
        (sub == 0 ? (!(p[2] && p[4] && p[6]) && !(p[4] && p[6] && p[8]))
                  : (!(p[2] && p[4] && p[8]) && !(p[2] && p[6] && p[8])));
    end
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) if (kill[y][x]) b[y][x] = 1;
  endtask
  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y;
    x = nout % W; y = nout / W;
    check(ob == res[y][x], $sformatf("(%0d,%0d) got %0d exp %0d", x, y, ob, res[y][x]));
    check(sout == 7'((x + 3 * y) % 128), "side");
    nout++;
  end
  initial begin
    int thick;
    nout = 0; in_valid = 0; din = 0; sin = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      img[y][x] = 200;
      if (y >= 3 && y <= 6 && x >= 2 && x <= 20) img[y][x] = 30;     // 4-thick bar
      if (x >= 10 && x <= 12 && y >= 9 && y <= 18) img[y][x] = 40;   // 3-thick bar
      if ($urandom_range(0, 30) == 0) img[y][x] = 60;
      b[y][x] = img[y][x] >= 128;
    end
    for (int r = 0; r < 2 * NP; r++) zs(r % 2);
    res = b;
    thick = 0;
    for (int y = 0; y < 9; y++) thick += !res[y][11];
    check(thick == 1, $sformatf("bar thinned to one pixel (%0d)", thick));
    repeat (3) @(posedge clk); rst_n = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      @(negedge clk); in_valid = 1; din = 8'(img[y][x]); sin = 7'((x + 3 * y) % 128);
    end
    @(negedge clk); in_valid = 0;
    wait (nout == W * H);
    repeat (5) @(posedge clk);
    check(del > 0, "pixels deleted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
