// iris_match_tb: streams random 7-bit codes (mask bit plus six bit planes) of M = 200 words
// against stored templates: an identical copy (score 255), a copy with about a tenth of the
// bits flipped, an unrelated code, and one with every mask bit cleared (score 0). The
// Hamming-distance score is compared with the formula computed here.
module iris_match_tb;
  localparam int M = 200, WW = 7;
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
  logic in_valid, in_last, done; logic [7:0] ia, ta, score; logic [WW-1:0] iw, tw; logic [31:0] nd, nc;
  iris_match #(.M(M), .WW(WW)) dut (.clk, .rst_n, .in_valid, .in_addr(ia), .in_word(iw), .in_last,
    .t_addr(ta), .t_word(tw), .done, .score, .n_diff(nd), .n_cmp(nc));
  logic [WW-1:0] q [M], t [M];
  assign tw = t[ta];
  task automatic run(input string what);
    int d, c, s;
    d = 0; c = 0;
    for (int i = 0; i < M; i++) if (q[i][6] && t[i][6]) begin
      c += 6; d += $countones(q[i][5:0] ^ t[i][5:0]);
    end
    s = (c == 0) ? 0 : 255 - (d * 255 + c / 2) / c;
    for (int i = 0; i < M; i++) begin
      @(negedge clk); in_valid = 1; ia = 8'(i); iw = q[i]; in_last = (i == M - 1);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    check(done, {what, " done one cycle after last"});
    check(int'(score) == s && int'(nd) == d && int'(nc) == c,
          $sformatf("%s score %0d exp %0d (d %0d/%0d)", what, score, s, nd, nc));
  endtask
  initial begin
    in_valid = 0; in_last = 0; ia = 0; iw = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < M; i++) begin q[i] = WW'($urandom); q[i][6] = ($urandom_range(0, 4) != 0); t[i] = q[i]; end
    run("same"); check(score == 255, "identical code scores 255");
    for (int i = 0; i < M; i++) for (int b = 0; b < 6; b++) if ($urandom_range(0, 9) == 0) t[i][b] = ~t[i][b];
    run("noisy"); check(score > 200, "noisy copy scores high");
    for (int i = 0; i < M; i++) t[i] = WW'($urandom);
    run("other"); check(score < 170, "unrelated code scores near half");
    for (int i = 0; i < M; i++) t[i][6] = 0;
    run("masked"); check(score == 0, "nothing compared gives 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
