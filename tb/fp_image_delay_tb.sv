// fp_image_delay_tb: writes pixels and pops them at random, checking that they come out
// in order and that the fill level follows; then overfills a 16-deep FIFO and checks the
// overflow flag and that no stored pixel was overwritten.
module fp_image_delay_tb;
  localparam int D = 16;
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
  logic in_valid, pop, ovf, udf; logic [7:0] din, dout; logic [4:0] level;
  fp_image_delay #(.DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_pix(din), .pop, .out_pix(dout),
    .level, .overflow(ovf), .underflow(udf));
  int q[$];
  initial begin
    in_valid = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid = (q.size() < D) && ($urandom_range(0, 1) == 1);
      din = 8'($urandom);
      pop = (q.size() > 0) && ($urandom_range(0, 2) == 0);
      if (pop) check(dout == 8'(q[0]), $sformatf("order: got %0d exp %0d", dout, q[0]));
      check(int'(level) == q.size(), "level");
      @(posedge clk); #1;
      if (pop) void'(q.pop_front());
      if (in_valid) q.push_back(din);
    end
    @(negedge clk); in_valid = 0; pop = 0;
    check(!ovf && !udf, "no flags in correct use");
    // overfill
    while (q.size() < D + 3) begin
      @(negedge clk); in_valid = 1; din = 8'(q.size()); q.push_back(din);
    end
    @(negedge clk); in_valid = 0;
    check(ovf, "overflow flagged");
    check(int'(level) == D, "full level");
    check(dout != 8'(D + 2) || q[0] == D + 2, "head not overwritten");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
