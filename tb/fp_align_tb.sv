// fp_align_tb: loads M1 with a random input set and a template that is the same set
// shifted and shuffled, runs the alignment, and checks (a) every segment written into M1
// against a nearest-neighbour search done here, (b) that the chosen pair has the lowest
// cost, is the first such pair in scan order and is a true correspondence, and (c) that
// found is low when the two sets share no minutia type.
module fp_align_tb;
  localparam int N = 16, NI = 12;
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
  logic we, wb; logic [3:0] wa; bio_pkg::minutia_t wd;
  logic mab, mbb, swe, swb, sab, sbb; logic [3:0] maa, mba, swa, saa, sba;
  bio_pkg::minutia_t mad, mbd; bio_pkg::segment_t swd, sad, sbd;
  logic start, done, found; logic [4:0] n_in, n_tp; logic [3:0] ri, rt;
  logic tbsel; logic tb_b; logic [3:0] tb_a;
  fp_m1 #(.NMAX(N)) m1 (.clk, .min_we(we), .min_wbank(wb), .min_waddr(wa), .min_wdata(wd),
    .min_abank(tbsel ? tb_b : mab), .min_aaddr(tbsel ? tb_a : maa), .min_adata(mad),
    .min_bbank(mbb), .min_baddr(mba), .min_bdata(mbd),
    .seg_we(swe), .seg_wbank(swb), .seg_waddr(swa), .seg_wdata(swd),
    .seg_abank(tbsel ? tb_b : sab), .seg_aaddr(tbsel ? tb_a : saa), .seg_adata(sad),
    .seg_bbank(sbb), .seg_baddr(sba), .seg_bdata(sbd));
  fp_align #(.NMAX(N)) dut (.clk, .rst_n, .start, .n_in, .n_tp,
    .min_abank(mab), .min_aaddr(maa), .min_adata(mad), .min_bbank(mbb), .min_baddr(mba), .min_bdata(mbd),
    .seg_we(swe), .seg_wbank(swb), .seg_waddr(swa), .seg_wdata(swd),
    .seg_abank(sab), .seg_aaddr(saa), .seg_adata(sad), .seg_bbank(sbb), .seg_baddr(sba), .seg_bdata(sbd),
    .done, .found, .ref_in(ri), .ref_tp(rt));

  int xs[2][NI], ys[2][NI], an[2][NI], ty[2][NI], perm[NI], sl[2][NI], sa[2][NI];
  task automatic load();
    for (int b = 0; b < 2; b++) for (int i = 0; i < NI; i++) begin
      @(negedge clk); we = 1; wb = 1'(b); wa = 4'(i);
      wd = '{x: 10'(xs[b][i]), y: 10'(ys[b][i]), ang: 8'(an[b][i]), typ: 1'(ty[b][i])};
    end
    @(negedge clk); we = 0;
  endtask
  task automatic run();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask
  initial begin
    int best, bi, bj;
    we = 0; start = 0; tbsel = 0; n_in = NI; n_tp = NI;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NI; i++) perm[i] = i;
    perm.shuffle();
    for (int i = 0; i < NI; i++) begin
      xs[0][i] = $urandom_range(20, 280); ys[0][i] = $urandom_range(20, 500);
      an[0][i] = $urandom_range(0, 127); ty[0][i] = $urandom_range(0, 1);
    end
    for (int i = 0; i < NI; i++) begin
      xs[1][perm[i]] = xs[0][i] + 7; ys[1][perm[i]] = ys[0][i] - 5;
      an[1][perm[i]] = an[0][i]; ty[1][perm[i]] = ty[0][i];
    end
    // reference segments
    for (int b = 0; b < 2; b++) for (int i = 0; i < NI; i++) begin
      int bd, ba;
      bd = -1; ba = 0;
      for (int j = 0; j < NI; j++) if (j != i) begin
        int d;
        d = (xs[b][i]-xs[b][j])**2 + (ys[b][i]-ys[b][j])**2;
        if (bd < 0 || d < bd) begin bd = d; ba = an[b][j]; end
      end
      sl[b][i] = int'($floor($sqrt(real'(bd)))); if (sl[b][i] > 255) sl[b][i] = 255;
      sa[b][i] = (ba - an[b][i] + 256) % 256;
    end
    load();
    run();
    tbsel = 1;
    for (int b = 0; b < 2; b++) for (int i = 0; i < NI; i++) begin
      tb_b = 1'(b); tb_a = 4'(i); #1;
      check(int'(sad.len) == sl[b][i] && int'(sad.ang) == sa[b][i],
            $sformatf("segment %0d/%0d got %0d,%0d exp %0d,%0d", b, i, sad.len, sad.ang, sl[b][i], sa[b][i]));
    end
    tbsel = 0;
    best = 1 << 20; bi = -1; bj = -1;
    for (int i = 0; i < NI; i++) for (int j = 0; j < NI; j++) if (ty[0][i] == ty[1][j]) begin
      int c, da;
      da = (sa[0][i] - sa[1][j] + 256) % 256; if (da > 128) da = 256 - da;
      c = ((sl[0][i] > sl[1][j]) ? sl[0][i] - sl[1][j] : sl[1][j] - sl[0][i]) + da;
      if (c < best) begin best = c; bi = i; bj = j; end
    end
    check(found, "pair found");
    check(int'(ri) == bi && int'(rt) == bj, $sformatf("pair %0d,%0d exp %0d,%0d", ri, rt, bi, bj));
    check(perm[ri] == int'(rt), "pair is a true correspondence");
    // no common type
    for (int i = 0; i < NI; i++) begin ty[0][i] = 0; ty[1][i] = 1; end
    load(); run();
    check(!found, "no pair without common type");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
