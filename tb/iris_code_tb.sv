// iris_code_tb: a 3-row by 10-column enhanced image (M = 30) is coded twice with limbic row
// 2; each word must be {row < limbic, pixel bits 6..1} at the running address, with
// out_last on the final word of each frame and one cycle of latency.
module iris_code_tb;
  localparam int M = 30, NA = 10;
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
  logic in_valid, out_valid, out_last; logic [7:0] din; logic [15:0] row; logic [4:0] oa; logic [6:0] ow;
  iris_code #(.M(M)) dut (.clk, .rst_n, .in_valid, .in_pix(din), .in_row(row), .limbic(8'd2),
    .out_valid, .out_addr(oa), .out_word(ow), .out_last);
  logic [7:0] img [2*M];
  int nout, nlast;
  always @(posedge clk) if (rst_n && out_valid) begin
    int i;
    i = nout % M;
    check(int'(oa) == i, "address");
    check(ow == {(i / NA) < 2, img[nout][6:1]}, $sformatf("word %0d", nout));
    check(out_last == (i == M - 1), "last flag");
    nlast += out_last;
    nout++;
  end
  initial begin
    in_valid = 0; din = 0; row = 0; nout = 0; nlast = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2 * M; i++) begin
      @(negedge clk); in_valid = ($urandom_range(0, 3) != 0);
      if (!in_valid) begin @(negedge clk); in_valid = 1; end
      img[i] = 8'($urandom); din = img[i]; row = 16'((i % M) / NA);
    end
    @(negedge clk); in_valid = 0; @(negedge clk);
    check(nout == 2 * M && nlast == 2, "counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
