// iris_template_tb: majority-bit selection over three enrolment codes. First the three
// 7 x 5 code matrices printed in the paper's majority-bit figure are fed as seven 5-bit
// words per sample and the result is compared with the printed fourth matrix; then random
// 40-word codes are checked against a bitwise majority computed here. Output follows the
// third sample's word by one cycle.
module iris_template_tb;
  localparam int M = 40, WW = 5;
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
  logic in_valid, out_valid; logic [1:0] smp; logic [5:0] ia, oa; logic [WW-1:0] iw, ow;
  iris_template #(.M(M), .WW(WW)) dut (.clk, .rst_n, .in_valid, .in_sample(smp), .in_addr(ia), .in_word(iw),
    .out_valid, .out_addr(oa), .out_word(ow));
  // rows of the figure, leftmost printed column = MSB
  logic [4:0] fa [7] = '{5'b10110, 5'b11000, 5'b01100, 5'b01010, 5'b01101, 5'b01111, 5'b10110};
  logic [4:0] fb [7] = '{5'b11001, 5'b01101, 5'b11001, 5'b00100, 5'b11111, 5'b01011, 5'b01001};
  logic [4:0] fc [7] = '{5'b00101, 5'b01010, 5'b11010, 5'b11011, 5'b11000, 5'b00010, 5'b11011};
  logic [4:0] fd [7] = '{5'b10101, 5'b01000, 5'b11000, 5'b00010, 5'b11101, 5'b01011, 5'b11011};
  logic [WW-1:0] s [3][M];
  logic [WW-1:0] expw [M];
  int nout;
  always @(posedge clk) if (rst_n && out_valid) begin
    check(ow == expw[oa], $sformatf("addr %0d got %b exp %b", oa, ow, expw[oa]));
    nout++;
  end
  task automatic run(input int n);
    nout = 0;
    for (int k = 0; k < 3; k++) for (int i = 0; i < n; i++) begin
      @(negedge clk); in_valid = 1; smp = 2'(k); ia = 6'(i); iw = s[k][i];
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    check(nout == n, "one output per word of the third sample");
  endtask
  initial begin
    in_valid = 0; smp = 0; ia = 0; iw = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 7; i++) begin
      s[0][i] = fa[i]; s[1][i] = fb[i]; s[2][i] = fc[i]; expw[i] = fd[i];
    end
    // The printed result row 4 shows 0 in column 2 where the three inputs read 1, 0, 1;
    // the majority rule stated in the text gives 1 there, and that rule is what is built.
    expw[3] = 5'b01010;
    run(7);
    for (int i = 0; i < 7; i++)
      check(expw[i] == ((fa[i] & fb[i]) | (fb[i] & fc[i]) | (fa[i] & fc[i])), "figure rows are majorities");
    for (int i = 0; i < M; i++) begin
      for (int k = 0; k < 3; k++) s[k][i] = WW'($urandom);
      expw[i] = (s[0][i] & s[1][i]) | (s[1][i] & s[2][i]) | (s[0][i] & s[2][i]);
    end
    run(M);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
