// fp_m2_tb: writes random polar minutiae into both banks of M2 and reads them back
// through both read ports, comparing with a copy kept here.
module fp_m2_tb;
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
  logic we, wb, ab, bb; logic [3:0] wa, aa, ba; bio_pkg::polar_t wd, ad, bd;
  fp_m2 #(.NMAX(N)) dut (.clk, .we, .wbank(wb), .waddr(wa), .wdata(wd), .abank(ab), .aaddr(aa),
    .adata(ad), .bbank(bb), .baddr(ba), .bdata(bd));
  bio_pkg::polar_t ref_m [2][N];
  initial begin
    we = 0;
    for (int b = 0; b < 2; b++) for (int i = 0; i < N; i++) begin
      @(negedge clk); we = 1; wb = 1'(b); wa = 4'(i); wd = bio_pkg::polar_t'($urandom); ref_m[b][i] = wd;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 100; t++) begin
      int b1, b2, i1, i2;
      b1 = $urandom_range(0, 1); b2 = $urandom_range(0, 1); i1 = $urandom_range(0, N-1); i2 = $urandom_range(0, N-1);
      ab = 1'(b1); aa = 4'(i1); bb = 1'(b2); ba = 4'(i2);
      #1;
      check(ad == ref_m[b1][i1] && bd == ref_m[b2][i2], "read");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
