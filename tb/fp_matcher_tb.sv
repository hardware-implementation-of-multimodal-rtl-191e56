// fp_matcher_tb: end-to-end test of the alignment and matching engine. A random input
// print matched against a shifted and shuffled copy of itself must score 255 with every
// minutia paired; against an unrelated random print it must score low; with no common
// minutia type no reference pair exists and the score is 0.
module fp_matcher_tb;
  localparam int N = 32, NI = 20;
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
  logic we, wb, start, busy, done, pf; logic [4:0] wa; bio_pkg::minutia_t wd;
  logic [5:0] n_in, n_tp, matched; logic [7:0] score;
  fp_matcher #(.NMAX(N)) dut (.clk, .rst_n, .min_we(we), .min_wbank(wb), .min_waddr(wa), .min_wdata(wd),
    .n_in, .n_tp, .start, .busy, .done, .score, .matched, .pair_found(pf));
  bio_pkg::minutia_t S [2][N];
  task automatic run();
    for (int b = 0; b < 2; b++) for (int i = 0; i < NI; i++) begin
      @(negedge clk); we = 1; wb = 1'(b); wa = 5'(i); wd = S[b][i];
    end
    @(negedge clk); we = 0; n_in = NI; n_tp = NI; start = 1; @(negedge clk); start = 0;
    check(busy, "busy while running");
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask
  initial begin
    int perm [NI];
    we = 0; start = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NI; i++) perm[i] = i;
    perm.shuffle();
    for (int i = 0; i < NI; i++)
      S[0][i] = '{x: 10'($urandom_range(20, 270)), y: 10'($urandom_range(20, 530)),
                  ang: 8'($urandom_range(0, 127)), typ: 1'($urandom)};
    for (int i = 0; i < NI; i++) begin
      S[1][perm[i]] = S[0][i]; S[1][perm[i]].x = S[0][i].x + 10'd9; S[1][perm[i]].y = S[0][i].y - 10'd4;
    end
    run();
    check(pf, "pair found");
    check(score == 8'd255 && matched == NI, $sformatf("genuine: score %0d matched %0d", score, matched));
    for (int i = 0; i < NI; i++)
      S[1][i] = '{x: 10'($urandom_range(20, 270)), y: 10'($urandom_range(20, 530)),
                  ang: 8'($urandom_range(0, 127)), typ: 1'($urandom)};
    run();
    check(score < 8'd128, $sformatf("impostor: score %0d", score));
    for (int i = 0; i < NI; i++) begin S[0][i].typ = 1'b0; S[1][i].typ = 1'b1; end
    run();
    check(!pf && score == 0, "no common type");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
