// cordic_tb: drives random vectors (one per cycle, back to back) through the CORDIC and
// compares modulus and angle with real-valued sqrt/atan2 computed here; also checks that
// each result appears exactly ITER+2 cycles after its input.
module cordic_tb;
  localparam int ITER = 14;
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

  logic in_valid; logic signed [23:0] x, y; logic out_valid; logic [23:0] mag; logic [7:0] ang;
  cordic #(.IW(24), .ITER(ITER)) dut (.clk, .rst_n, .in_valid, .in_x(x), .in_y(y),
    .out_valid, .out_mag(mag), .out_ang(ang));

  int qx[$], qy[$], qt[$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    int ex, ey, et; real m, a; int ea, da;
    ex = qx.pop_front(); ey = qy.pop_front(); et = qt.pop_front();
    m = $sqrt(real'(ex) * ex + real'(ey) * ey);
    a = $atan2(real'(ey), real'(ex)) / (2.0 * 3.14159265358979) * 256.0;
    if (a < 0) a += 256.0;
    ea = int'(a) % 256;
    da = (int'(ang) - ea + 256) % 256; if (da > 128) da = 256 - da;
    check(da <= 1, $sformatf("angle (%0d,%0d) got %0d exp %0d", ex, ey, ang, ea));
    check(real'(mag) > m * 0.995 - 2 && real'(mag) < m * 1.005 + 2,
          $sformatf("mag (%0d,%0d) got %0d exp %f", ex, ey, mag, m));
    check(cyc - et == ITER + 2, $sformatf("latency %0d", cyc - et));
  end

  initial begin
    in_valid = 0; x = 0; y = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      in_valid = 1;
      if (i < 8) begin
        x = (i % 3 == 0) ? 1000 : (i % 3 == 1) ? -1000 : 0;
        y = (i % 2 == 0) ? 0 : ((i < 4) ? 700 : -700);
        if (x == 0 && y == 0) y = 1000;
      end else begin
        x = $signed($urandom_range(0, 400000)) - 200000;
        y = $signed($urandom_range(0, 400000)) - 200000;
      end
      qx.push_back(x); qy.push_back(y); qt.push_back(cyc + 1);
    end
    @(negedge clk); in_valid = 0;
    repeat (ITER + 10) @(posedge clk);
    check(qx.size() == 0, "all results returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
