// fusion_tb: min-max normalisation and weighted-sum fusion of the two match scores. With
// normalisation ranges fingerprint [20, 220] and iris [10, 250], 300 random score pairs are
// applied in three arrival orders (fingerprint first, iris first, together); each decision
// must come one cycle after the second score and equal the model computed here.
module fusion_tb;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nacc = 0, nrej = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic fv, iv, dv, acc; logic [7:0] fs, is, fused;
  fusion #(.FP_MIN(20), .FP_MAX(220), .IR_MIN(10), .IR_MAX(250)) dut (.clk, .rst_n, .fp_valid(fv), .fp_score(fs),
    .ir_valid(iv), .ir_score(is), .decision_valid(dv), .accept(acc), .fused);
  function automatic int nrm(int s, int lo, int hi);
    if (s <= lo) return 0;
    if (s >= hi) return 255;
    return ((s - lo) * 255) / (hi - lo);
  endfunction
  initial begin
    fv = 0; iv = 0; fs = 0; is = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int a, b, f, order;
      a = $urandom_range(0, 255); b = $urandom_range(0, 255); order = n % 3;
      f = (nrm(a, 20, 220) * 102 + nrm(b, 10, 250) * 154 + 128) >> 8;
      @(negedge clk);
      if (order == 0) begin fv = 1; fs = 8'(a); end
      else if (order == 1) begin iv = 1; is = 8'(b); end
      else begin fv = 1; fs = 8'(a); iv = 1; is = 8'(b); end
      if (order != 2) begin
        @(negedge clk); fv = 0; iv = 0;
        check(!dv, "no decision on one score");
        repeat ($urandom_range(0, 3)) @(negedge clk);
        if (order == 0) begin iv = 1; is = 8'(b); end else begin fv = 1; fs = 8'(a); end
      end
      @(posedge clk); #1; fv = 0; iv = 0;
      check(dv, "decision one cycle after the second score");
      check(int'(fused) == f && acc == (f > 128), $sformatf("fused %0d exp %0d", fused, f));
      if (acc) nacc++; else nrej++;
    end
    check(nacc > 0 && nrej > 0, "both outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
