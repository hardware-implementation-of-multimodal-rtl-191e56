// fp_m1_tb: writes random minutiae and segments into both banks of M1 and reads them
// back through both read ports, comparing with a copy kept here.
module fp_m1_tb;
  localparam int N = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic mwe, mwb, mab, mbb, swe, swb, sab, sbb;
  logic [3:0] mwa, maa, mba, swa, saa, sba;
  bio_pkg::minutia_t mwd, mad, mbd; bio_pkg::segment_t swd, sad, sbd;
  fp_m1 #(.NMAX(N)) dut (.clk, .min_we(mwe), .min_wbank(mwb), .min_waddr(mwa), .min_wdata(mwd),
    .min_abank(mab), .min_aaddr(maa), .min_adata(mad), .min_bbank(mbb), .min_baddr(mba), .min_bdata(mbd),
    .seg_we(swe), .seg_wbank(swb), .seg_waddr(swa), .seg_wdata(swd),
    .seg_abank(sab), .seg_aaddr(saa), .seg_adata(sad), .seg_bbank(sbb), .seg_baddr(sba), .seg_bdata(sbd));
  bio_pkg::minutia_t mref [2][N]; bio_pkg::segment_t sref [2][N];
  initial begin
    mwe = 0; swe = 0;
    for (int b = 0; b < 2; b++) for (int i = 0; i < N; i++) begin
      @(negedge clk);
      mwe = 1; mwb = 1'(b); mwa = 4'(i); mwd = bio_pkg::minutia_t'($urandom);
      swe = 1; swb = 1'(b); swa = 4'(i); swd = bio_pkg::segment_t'($urandom);
      mref[b][i] = mwd; sref[b][i] = swd;
    end
    @(negedge clk); mwe = 0; swe = 0;
    for (int t = 0; t < 100; t++) begin
      int b1, b2, i1, i2;
      b1 = $urandom_range(0, 1); b2 = $urandom_range(0, 1); i1 = $urandom_range(0, N-1); i2 = $urandom_range(0, N-1);
      mab = 1'(b1); maa = 4'(i1); mbb = 1'(b2); mba = 4'(i2);
      sab = 1'(b2); saa = 4'(i2); sbb = 1'(b1); sba = 4'(i1);
      #1;
      check(mad == mref[b1][i1] && mbd == mref[b2][i2], "minutiae read");
      check(sad == sref[b2][i2] && sbd == sref[b1][i1], "segment read");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
