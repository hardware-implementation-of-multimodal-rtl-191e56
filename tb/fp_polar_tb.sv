// fp_polar_tb: loads random minutiae into M1, runs the polar conversion with a CORDIC
// about given reference minutiae, and compares every record written to M2 with a
// real-valued (r / 4, atan2 - reference angle, angle - reference angle) computed here.
module fp_polar_tb;
  localparam int N = 16, NI = 10, NT = 7;
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
  logic mab, mbb; logic [3:0] maa, mba; bio_pkg::minutia_t mad, mbd;
  logic start, done; logic [4:0] n_in, n_tp; logic [3:0] ri, rt;
  logic civ, cov; logic signed [23:0] cx, cy; logic [23:0] cm; logic [7:0] ca;
  logic m2we, m2wb; logic [3:0] m2wa; bio_pkg::polar_t m2wd, pa, pb; logic rb; logic [3:0] ra;
  fp_m1 #(.NMAX(N)) m1 (.clk, .min_we(we), .min_wbank(wb), .min_waddr(wa), .min_wdata(wd),
    .min_abank(mab), .min_aaddr(maa), .min_adata(mad), .min_bbank(mbb), .min_baddr(mba), .min_bdata(mbd),
    .seg_we(1'b0), .seg_wbank(1'b0), .seg_waddr(4'd0), .seg_wdata('0), .seg_abank(1'b0), .seg_aaddr(4'd0),
    .seg_adata(), .seg_bbank(1'b0), .seg_baddr(4'd0), .seg_bdata());
  cordic #(.IW(24), .ITER(14)) cor (.clk, .rst_n, .in_valid(civ), .in_x(cx), .in_y(cy),
    .out_valid(cov), .out_mag(cm), .out_ang(ca));
  fp_polar #(.NMAX(N)) dut (.clk, .rst_n, .start, .n_in, .n_tp, .ref_in(ri), .ref_tp(rt),
    .min_abank(mab), .min_aaddr(maa), .min_adata(mad), .min_bbank(mbb), .min_baddr(mba), .min_bdata(mbd),
    .cor_valid(civ), .cor_x(cx), .cor_y(cy), .cor_out_valid(cov), .cor_mag(cm), .cor_ang(ca),
    .m2_we(m2we), .m2_wbank(m2wb), .m2_waddr(m2wa), .m2_wdata(m2wd), .done);
  fp_m2 #(.NMAX(N)) m2 (.clk, .we(m2we), .wbank(m2wb), .waddr(m2wa), .wdata(m2wd),
    .abank(rb), .aaddr(ra), .adata(pa), .bbank(1'b0), .baddr(4'd0), .bdata(pb));
  int xs[2][N], ys[2][N], an[2][N], ty[2][N], nw;
  always @(posedge clk) if (m2we) nw++;
  initial begin
    we = 0; start = 0; n_in = NI; n_tp = NT; ri = 3; rt = 5; nw = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 2; b++) for (int i = 0; i < (b ? NT : NI); i++) begin
      xs[b][i] = $urandom_range(0, 295); ys[b][i] = $urandom_range(0, 559);
      an[b][i] = $urandom_range(0, 127); ty[b][i] = $urandom_range(0, 1);
      @(negedge clk); we = 1; wb = 1'(b); wa = 4'(i);
      wd = '{x: 10'(xs[b][i]), y: 10'(ys[b][i]), ang: 8'(an[b][i]), typ: 1'(ty[b][i])};
    end
    @(negedge clk); we = 0; start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    check(nw == NI + NT, "records written");
    for (int b = 0; b < 2; b++) for (int i = 0; i < (b ? NT : NI); i++) begin
      int m, dx, dy, er, et, eo, d; real a;
      m = b ? rt : ri;
      dx = xs[b][i] - xs[b][m]; dy = ys[b][i] - ys[b][m];
      er = int'($floor($sqrt(real'(dx*dx + dy*dy)) / 4.0)); if (er > 255) er = 255;
      a = (dx == 0 && dy == 0) ? 0.0 : $atan2(real'(dy), real'(dx)) / (2.0 * 3.14159265358979) * 256.0;
      if (a < 0) a += 256.0;
      et = (int'(a) - an[b][m] + 512) % 256;
      eo = (an[b][i] - an[b][m] + 256) % 256;
      rb = 1'(b); ra = 4'(i); #1;
      d = (int'(pa.t) - et + 256) % 256; if (d > 128) d = 256 - d;
      check(int'(pa.r) >= er - 1 && int'(pa.r) <= er + 1, $sformatf("r %0d/%0d got %0d exp %0d", b, i, pa.r, er));
      check(d <= 1 || (dx == 0 && dy == 0), $sformatf("theta %0d/%0d got %0d exp %0d", b, i, pa.t, et));
      check(int'(pa.o) == eo && int'(pa.typ) == ty[b][i], "orientation and type");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
