// iris_frame_buffer_tb: writes two random 20 x 12 frames in raster order, checks the
// frame_done pulse after exactly W*H pixels, and reads random positions back (one-cycle
// synchronous read latency) against a copy kept here.
module iris_frame_buffer_tb;
  localparam int W = 20, H = 12;
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
  logic in_valid, frame_done; logic [7:0] din, rdata; logic [9:0] rx, ry;
  iris_frame_buffer #(.W(W), .H(H)) dut (.clk, .rst_n, .in_valid, .in_pix(din), .frame_done, .rx, .ry, .rdata);
  logic [7:0] img [H][W];
  int ndone;
  always @(posedge clk) if (rst_n && frame_done) ndone++;
  initial begin
    in_valid = 0; din = 0; rx = 0; ry = 0; ndone = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        @(negedge clk); in_valid = 1; din = 8'($urandom); img[y][x] = din;
        if (y == H - 1 && x == W - 1) ;
        else begin @(posedge clk); #1; check(!frame_done, "no early frame_done"); end
      end
      @(posedge clk); #1; check(frame_done, "frame_done after W*H pixels");
      @(negedge clk); in_valid = 0;
      for (int i = 0; i < 100; i++) begin
        int x, y;
        x = $urandom_range(0, W - 1); y = $urandom_range(0, H - 1);
        @(negedge clk); rx = 10'(x); ry = 10'(y);
        @(posedge clk); #1; check(rdata == img[y][x], $sformatf("read (%0d,%0d)", x, y));
      end
    end
    check(ndone == 2, "two frame_done pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
