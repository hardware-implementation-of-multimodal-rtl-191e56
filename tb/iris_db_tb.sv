// iris_db_tb: templates for persons 0, 2 and 4 of a five-person store (M = 50 words) are
// written, the valid flags checked, and every word of every written person read back
// through the asynchronous read port; person 2 is then overwritten and re-checked. A person
// written only partly must not be marked valid.
module iris_db_tb;
  localparam int NP = 5, M = 50, WW = 7;
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
  logic we; logic [2:0] wp, rp; logic [5:0] wa, ra; logic [WW-1:0] wd, rd; logic [NP-1:0] valid;
  iris_db #(.NP(NP), .M(M), .WW(WW)) dut (.clk, .rst_n, .we, .wperson(wp), .waddr(wa), .wdata(wd),
    .rperson(rp), .raddr(ra), .rdata(rd), .valid);
  logic [WW-1:0] ref_m [NP][M];
  task automatic wr(input int p);
    for (int i = 0; i < M; i++) begin
      @(negedge clk); we = 1; wp = 3'(p); wa = 6'(i); wd = WW'($urandom); ref_m[p][i] = wd;
    end
    @(negedge clk); we = 0;
  endtask
  task automatic rd_all(input int p);
    for (int i = 0; i < M; i++) begin
      rp = 3'(p); ra = 6'(i); #1; check(rd == ref_m[p][i], $sformatf("p%0d w%0d", p, i));
    end
  endtask
  initial begin
    we = 0; wp = 0; wa = 0; wd = 0; rp = 0; ra = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); check(valid == 0, "empty after reset");
    for (int i = 0; i < M - 1; i++) begin
      @(negedge clk); we = 1; wp = 3'd1; wa = 6'(i); wd = '0;
    end
    @(negedge clk); we = 0;
    check(valid == 0, "partly written person not valid");
    wr(0); wr(2); wr(4);
    check(valid == 5'b10101, $sformatf("valid %b", valid));
    rd_all(0); rd_all(2); rd_all(4);
    wr(2); rd_all(2); rd_all(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
