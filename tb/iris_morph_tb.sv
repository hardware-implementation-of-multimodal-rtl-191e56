// iris_morph_tb: a random binary 26 x 18 frame with a solid block is opened (3 x 3
// erosion then dilation) and compared bit for bit with a reference computed here with the
// same border convention; isolated specks must vanish and the block must survive.
module iris_morph_tb;
  localparam int W = 26, H = 18;
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
  logic in_valid, ib, out_valid, ob;
  iris_morph #(.W(W), .H(H)) dut (.clk, .rst_n, .in_valid, .in_bit(ib), .out_valid, .out_bit(ob));
  bit a [H][W], e [H][W], o [H][W];
  int nout;
  always @(posedge clk) if (rst_n && out_valid) begin
    int x, y;
    x = nout % W; y = nout / W;
    check(ob == o[y][x], $sformatf("(%0d,%0d) got %0d exp %0d", x, y, ob, o[y][x]));
    nout++;
  end
  initial begin
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      a[y][x] = (x >= 5 && x < 12 && y >= 4 && y < 11) || ($urandom_range(0, 9) == 0);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      e[y][x] = 1;
      for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++)
        if (!(x+dx < 0 || y+dy < 0 || x+dx >= W || y+dy >= H)) e[y][x] &= a[y+dy][x+dx];
    end
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      o[y][x] = 0;
      for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++)
        if (!(x+dx < 0 || y+dy < 0 || x+dx >= W || y+dy >= H)) o[y][x] |= e[y+dy][x+dx];
    end
    check(o[7][8] == 1, "block survives");
    nout = 0; in_valid = 0; ib = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      @(negedge clk); in_valid = 1; ib = a[y][x];
    end
    @(negedge clk); in_valid = 0;
    wait (nout == W * H);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
