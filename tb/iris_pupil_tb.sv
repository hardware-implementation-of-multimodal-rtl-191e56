// iris_pupil_tb: binary 80 x 60 frames with a disc (the pupil), a long thin bar, a larger
// non-round blob, a U shape (whose arms get different labels and must be merged) and
// specks. The block must report the disc's centre and radius within one pixel, count the
// regions correctly (merges included) and report "not found" for a frame without a disc.
module iris_pupil_tb;
  localparam int W = 80, H = 60;
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
  logic in_valid, ib, done, found, ovf; logic [9:0] cx, cy, r; logic [7:0] nreg;
  iris_pupil #(.W(W), .H(H), .NL(128), .AMIN(100), .AMAX(3000)) dut (.clk, .rst_n, .in_valid, .in_bit(ib),
    .done, .found, .cx, .cy, .radius(r), .overflow(ovf), .n_regions(nreg));
  bit a [H][W];
  task automatic send();
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      @(negedge clk); in_valid = 1; ib = a[y][x];
    end
    @(negedge clk); in_valid = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask
  initial begin
    in_valid = 0; ib = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        a[y][x] = 0;
        if (pass == 0 && (x - 50) * (x - 50) + (y - 35) * (y - 35) <= 100) a[y][x] = 1;  // disc r=10
        if (y == 5 && x >= 2 && x < 70) a[y][x] = 1;                                     // thin bar
        if (x >= 3 && x < 33 && y >= 40 && y < 48) a[y][x] = 1;                          // 30x8 blob
        if ((x == 10 || x == 20) && y >= 15 && y < 30) a[y][x] = 1;                      // U arms
        if (y == 30 && x >= 10 && x <= 20) a[y][x] = 1;                                  // U base
      end
      a[55][70] = 1; a[12][75] = 1;                                                      // specks
      send();
      check(!ovf, "no label overflow");
      check(int'(nreg) == (pass == 0 ? 6 : 5), $sformatf("regions %0d", nreg));
      if (pass == 0) begin
        check(found, "pupil found");
        check(cx >= 49 && cx <= 51 && cy >= 34 && cy <= 36, $sformatf("centre %0d,%0d", cx, cy));
        check(r >= 9 && r <= 11, $sformatf("radius %0d", r));
      end else begin
        check(!found, "no pupil in frame without disc");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
