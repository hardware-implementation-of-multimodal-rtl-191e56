// iris_limbic_tb: a 40 x 12 unwrapped image whose rows are dark up to row 7 and bright from
// row 7 on (plus noise) must give limbic = 7; the frame must then be replayed unchanged with
// the right row numbers. A second frame with the step at row 2 (below KMIN = 4) and a smaller
// step at row 9 must give 9.
module iris_limbic_tb;
  localparam int NA = 40, NR = 12;
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
  logic in_valid, out_valid, done; logic [7:0] din, opix, lim; logic [15:0] orow;
  iris_limbic #(.NA(NA), .NR(NR), .KMIN(4)) dut (.clk, .rst_n, .in_valid, .in_pix(din), .out_valid,
    .out_pix(opix), .out_row(orow), .limbic(lim), .done);
  logic [7:0] img [NR*NA];
  int nout, ndone;
  always @(posedge clk) if (rst_n && out_valid) begin
    check(opix == img[nout], $sformatf("replay %0d", nout));
    check(int'(orow) == nout / NA, "row tag");
    nout++;
  end
  always @(posedge clk) if (rst_n && done) ndone++;
  initial begin
    in_valid = 0; din = 0; nout = 0; ndone = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < NR * NA; i++) begin
        int r, v;
        r = i / NA;
        if (f == 0) v = (r >= 7) ? 180 : 60;
        else v = (r >= 9) ? 200 : (r >= 2) ? 150 : 20;
        img[i] = 8'(v + $urandom_range(0, 10));
      end
      nout = 0;
      for (int i = 0; i < NR * NA; i++) begin
        @(negedge clk); in_valid = 1; din = img[i];
      end
      @(negedge clk); in_valid = 0;
      wait (ndone == f + 1);
      @(negedge clk);
      check(nout == NR * NA, "replayed all");
      check(int'(lim) == (f == 0 ? 7 : 9), $sformatf("limbic %0d", lim));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
