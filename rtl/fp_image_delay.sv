// fp_image_delay: the "image delay" of the fingerprint enhancement block. The normalised
// image is written into a FIFO as it arrives and read out, one pixel per orientation
// value, when the orientation estimator produces that pixel's theta, so the guided
// Gaussian filter receives each pixel together with its own orientation whatever the
// estimator's latency. DEPTH must cover that latency in pixels (about 18 rows); the FIFO
// form and its depth are this design's choices. The output is combinational from the head
// of the FIFO: out_pix is valid in the cycle of pop. overflow flags a write into a full
// FIFO and underflow a pop from an empty one; neither happens in correct use.
// Lint note: the underflow assertion samples rst_n synchronously (disable iff) while the
// FIFO itself resets asynchronously, which draws a sync/async warning; it is intended.
module fp_image_delay #(
  parameter int unsigned DEPTH = 8192
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  bio_pkg::pix_t in_pix,
  input  logic          pop,
  output bio_pkg::pix_t out_pix,
  output logic [$clog2(DEPTH):0] level,
  output logic          overflow,
  output logic          underflow
);
  localparam int unsigned AW = $clog2(DEPTH);
  bio_pkg::pix_t mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_w, do_r;
  assign do_r = pop && (level != 0);
  assign do_w = in_valid && ((level != (AW+1)'(DEPTH)) || do_r);
  assign out_pix = mem[rp];

  always_ff @(posedge clk) if (do_w) mem[wp] <= in_pix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0; overflow <= 1'b0; underflow <= 1'b0;
    end else begin
      if (do_w) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_r) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      level <= level + (do_w ? 1'b1 : 1'b0) - (do_r ? 1'b1 : 1'b0);
      if (in_valid && !do_w) overflow  <= 1'b1;
      if (pop && !do_r)      underflow <= 1'b1;
    end
  end

  // A pop never finds the FIFO empty in correct use.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> level != 0);
endmodule
