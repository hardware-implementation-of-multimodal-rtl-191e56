// fp_match_tb: fills M2 with random polar minutiae in which part of the template is a
// slightly perturbed copy of the input, runs the matcher and compares the matched count
// and the score with a greedy reference with the same tolerances computed here; also
// checks the elastic rule (a radial error allowed far from the reference but not near it)
// and that a template minutia can be claimed by only one input minutia.
module fp_match_tb;
  localparam int N = 32;
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
  logic we, wb, ab, bb, start, done; logic [4:0] wa, aa, ba; bio_pkg::polar_t wd, ad, bd;
  logic [5:0] n_in, n_tp, matched; logic [7:0] score;
  fp_m2 #(.NMAX(N)) m2 (.clk, .we, .wbank(wb), .waddr(wa), .wdata(wd), .abank(ab), .aaddr(aa),
    .adata(ad), .bbank(bb), .baddr(ba), .bdata(bd));
  fp_match #(.NMAX(N)) dut (.clk, .rst_n, .start, .n_in, .n_tp, .abank(ab), .aaddr(aa), .adata(ad),
    .bbank(bb), .baddr(ba), .bdata(bd), .done, .matched, .score);
  bio_pkg::polar_t P [2][N];
  function automatic int adist(int a, int b);
    int d; d = (a - b + 256) % 256; return d > 128 ? 256 - d : d;
  endfunction
  task automatic run_case(int ni, int nt);
    int em, es; bit used [N];
    for (int b = 0; b < 2; b++) for (int i = 0; i < (b ? nt : ni); i++) begin
      @(negedge clk); we = 1; wb = 1'(b); wa = 5'(i); wd = P[b][i];
    end
    @(negedge clk); we = 0; n_in = 6'(ni); n_tp = 6'(nt);
    em = 0; used = '{default: 0};
    for (int i = 0; i < ni; i++)
      for (int j = 0; j < nt; j++) begin
        int dr;
        dr = int'(P[0][i].r) - int'(P[1][j].r); if (dr < 0) dr = -dr;
        if (!used[j] && P[0][i].typ == P[1][j].typ && dr <= 2 + P[0][i].r / 8 &&
            adist(P[0][i].t, P[1][j].t) <= 6 && adist(P[0][i].o, P[1][j].o) <= 8) begin
          used[j] = 1; em++; break;
        end
      end
    es = (em * 510 + (ni + nt) / 2) / (ni + nt); if (es > 255) es = 255;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    check(int'(matched) == em, $sformatf("matched %0d exp %0d", matched, em));
    check(int'(score) == es, $sformatf("score %0d exp %0d", score, es));
    @(negedge clk);
  endtask
  initial begin
    we = 0; start = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int ni, nt;
      ni = $urandom_range(5, N); nt = $urandom_range(5, N);
      for (int i = 0; i < ni; i++) P[0][i] = bio_pkg::polar_t'($urandom);
      for (int j = 0; j < nt; j++) begin
        if (j < ni && j % 2 == 0) begin
          P[1][j] = P[0][j];
          P[1][j].r = P[0][j].r + 8'($urandom_range(0, 2));
          P[1][j].t = P[0][j].t - 8'($urandom_range(0, 4));
        end else P[1][j] = bio_pkg::polar_t'($urandom);
      end
      run_case(ni, nt);
    end
    // elastic tolerance: radial error 10 is accepted at r = 200 but not at r = 20
    P[0][0] = '{r: 200, t: 10, o: 20, typ: 1}; P[1][0] = '{r: 210, t: 10, o: 20, typ: 1};
    P[0][1] = '{r: 20,  t: 90, o: 40, typ: 0}; P[1][1] = '{r: 30,  t: 90, o: 40, typ: 0};
    run_case(2, 2);
    check(matched == 1, "elastic radial tolerance");
    // two input minutiae near one template minutia: only one may claim it
    P[0][0] = '{r: 100, t: 50, o: 60, typ: 1}; P[0][1] = '{r: 101, t: 51, o: 61, typ: 1};
    P[1][0] = '{r: 100, t: 50, o: 60, typ: 1}; P[1][1] = '{r: 10, t: 200, o: 0, typ: 0};
    run_case(2, 2);
    check(matched == 1, "each template minutia used once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
