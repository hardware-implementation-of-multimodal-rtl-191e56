// fp_minutiae_tb: a 40 x 40 thinned test pattern (a frame of one-pixel ridges, a ridge
// that ends in the middle, a branching ridge and ridges that run out of the image) is
// scanned; the reported minutiae are compared with a crossing-number reference with the
// same four-direction border test computed here, and the known ending and bifurcation
// must be among them.
module fp_minutiae_tb;
  localparam int W = 40, H = 40, D = 8;
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
  logic in_valid, in_bit, out_valid, fdone; logic [6:0] th; bio_pkg::minutia_t m;
  logic [31:0] ne, nb, nr;
  fp_minutiae #(.W(W), .H(H), .DIST(D)) dut (.clk, .rst_n, .in_valid, .in_bit, .in_theta(th),
    .out_valid, .out_min(m), .frame_done(fdone), .n_end(ne), .n_bif(nb), .n_rejected(nr));
  bit b [H][W];
  int exp_q[$], got_q[$];
  function automatic bit rid(int x, int y);
    if (x < 0 || y < 0 || x >= W || y >= H) return 0;
    return !b[y][x];
  endfunction
  always @(posedge clk) if (rst_n && out_valid) begin
    got_q.push_back(int'(m.y) * 4096 + int'(m.x) * 2 + int'(m.typ));
    check(m.ang == 8'((m.x + m.y) % 128), "angle from side channel");
  end
  initial begin
    int fdone_seen;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) b[y][x] = 1;
    for (int i = 0; i < W; i++) begin b[12][i] = 0; b[28][i] = 0; end          // rows to the edges
    for (int i = 0; i < H; i++) begin b[i][6] = 0; b[i][33] = 0; end        // columns
    for (int x = 6; x <= 20; x++) b[20][x] = 0;                               // ends at (20,20)
    for (int y = 12; y <= 28; y++) b[y][26] = 0;                              // vertical stub
    for (int x = 23; x <= 25; x++) b[16][x] = 0;                              // branch at (26,16)
    // reference
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) if (rid(x, y)) begin
      bit r[8]; int t, cn; bit l, rr, u, dd;
      r = '{rid(x-1,y-1), rid(x-1,y), rid(x-1,y+1), rid(x,y+1), rid(x+1,y+1), rid(x+1,y), rid(x+1,y-1), rid(x,y-1)};
      t = 0; for (int i = 0; i < 8; i++) if (r[i] != r[(i+1)%8]) t++;
      cn = t / 2;
      l = 0; rr = 0; u = 0; dd = 0;
      for (int k = 1; k <= D; k++) begin
        if (rid(x-k,y)) l = 1; if (rid(x+k,y)) rr = 1; if (rid(x,y-k)) u = 1; if (rid(x,y+k)) dd = 1;
      end
      if ((cn == 1 || cn == 3) && l && rr && u && dd) exp_q.push_back(y * 4096 + x * 2 + (cn == 3));
    end
    in_valid = 0; in_bit = 1; th = 0; fdone_seen = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      @(negedge clk); in_valid = 1; in_bit = b[y][x]; th = 7'((x + y) % 128);
    end
    @(negedge clk); in_valid = 0;
    while (!fdone) @(posedge clk);
    repeat (3) @(posedge clk);
    check(got_q.size() == exp_q.size(), $sformatf("count got %0d exp %0d", got_q.size(), exp_q.size()));
    foreach (exp_q[i]) check(i < got_q.size() && got_q[i] == exp_q[i], $sformatf("minutia %0d", i));
    check(20 * 4096 + 20 * 2 + 0 inside {got_q}, "ending at (20,20)");
    check(16 * 4096 + 26 * 2 + 1 inside {got_q}, "bifurcation at (26,16)");
    check(nr > 0, "edge candidates rejected");
    check(int'(ne + nb) == got_q.size(), "counters");
    $display("minutiae %0d (end %0d bif %0d rejected %0d)", got_q.size(), ne, nb, nr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
