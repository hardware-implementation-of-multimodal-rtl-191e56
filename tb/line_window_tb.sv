// line_window_tb: two 7 x 5 frames of random pixels (with random input gaps) go through a
// 3 x 5 window padded with a constant and a 5 x 3 window padded with the centre pixel.
// Every output window, its centre position and the output count per frame are compared
// with the image; each output frame must end within the documented latency.
module line_window_tb;
  localparam int W = 7, H = 5;
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
  logic in_valid, va, vb, fla, flb; logic [7:0] din;
  logic [7:0] wa [3][5]; logic [7:0] wb [5][3];
  logic [15:0] xa, ya, xb, yb;
  line_window #(.DW(8), .KR(3), .KC(5), .W(W), .H(H), .PAD_CENTRE(1'b0), .PAD_VAL(8'd77)) ua (
    .clk, .rst_n, .in_valid, .in_data(din), .out_valid(va), .out_win(wa), .out_x(xa), .out_y(ya), .flushing(fla));
  line_window #(.DW(8), .KR(5), .KC(3), .W(W), .H(H), .PAD_CENTRE(1'b1)) ub (
    .clk, .rst_n, .in_valid, .in_data(din), .out_valid(vb), .out_win(wb), .out_x(xb), .out_y(yb), .flushing(flb));
  logic [7:0] img [H][W];
  int na, nb;
  always @(posedge clk) if (rst_n && va) begin
    int x, y, tx, ty; bit ok;
    x = na % (W * H) % W; y = na % (W * H) / W; ok = (int'(xa) == x && int'(ya) == y);
    for (int r = 0; r < 3; r++) for (int c = 0; c < 5; c++) begin
      tx = x + c - 2; ty = y + r - 1;
      ok &= (wa[r][c] == ((tx < 0 || ty < 0 || tx >= W || ty >= H) ? 8'd77 : img[ty][tx]));
    end
    check(ok, $sformatf("window A at (%0d,%0d)", x, y));
    na++;
  end
  always @(posedge clk) if (rst_n && vb) begin
    int x, y, tx, ty; bit ok;
    x = nb % (W * H) % W; y = nb % (W * H) / W; ok = (int'(xb) == x && int'(yb) == y);
    for (int r = 0; r < 5; r++) for (int c = 0; c < 3; c++) begin
      tx = x + c - 1; ty = y + r - 2;
      ok &= (wb[r][c] == ((tx < 0 || ty < 0 || tx >= W || ty >= H) ? img[y][x] : img[ty][tx]));
    end
    check(ok, $sformatf("window B at (%0d,%0d)", x, y));
    nb++;
  end
  initial begin
    in_valid = 0; din = 0; na = 0; nb = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = 8'($urandom);
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        @(negedge clk); in_valid = 0;
        repeat ($urandom_range(0, 1)) @(negedge clk);
        in_valid = 1; din = img[y][x];
      end
      @(negedge clk); in_valid = 0;
      // flush takes at most the window latency (2 rows + 2 pixels) plus a register
      repeat (2 * W + 2 + 2) @(negedge clk);
      check(na == (f + 1) * W * H && nb == (f + 1) * W * H, $sformatf("outputs %0d %0d", na, nb));
      check(!fla && !flb, "flush finished");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
