// iris_frame_buffer: SRAM buffer of the eye image. While the pupil is being located the
// incoming frame is written in raster order (the address advances by one per in_valid
// and wraps after W*H pixels); the normalisation block then reads any pixel at random
// through a synchronous read port: rdata holds pixel (rx, ry) one cycle after it is
// requested. The paper buffers the image in SRAM for normalisation; keeping the whole
// frame (320 x 240 x 8 = 614,400 bits, about the 612k memory bits the paper reports for
// pupil segmentation) rather than a crop is this design's choice.
module iris_frame_buffer #(
  parameter int unsigned W = 320,
  parameter int unsigned H = 240
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  bio_pkg::pix_t in_pix,
  output logic          frame_done,
  input  logic [9:0]    rx,
  input  logic [9:0]    ry,
  output bio_pkg::pix_t rdata
);
  localparam int unsigned N  = W * H;
  localparam int unsigned AW = $clog2(N);
  bio_pkg::pix_t mem [N];
  logic [AW-1:0] wa;

  always_ff @(posedge clk) begin
    if (in_valid) mem[wa] <= in_pix;
    rdata <= mem[AW'(32'(ry) * W + 32'(rx))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wa <= '0; frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (in_valid) begin
        if (wa == AW'(N - 1)) begin wa <= '0; frame_done <= 1'b1; end
        else wa <= wa + 1'b1;
      end
    end
  end
endmodule
