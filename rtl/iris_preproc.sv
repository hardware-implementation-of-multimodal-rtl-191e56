// iris_preproc: pre-processing of the eye image for pupil localisation. The image is
// smoothed by a 2-D Gaussian of sigma 5 (gauss_sep, +-2 sigma support); the smoothed
// value is subtracted from the pixel itself, delayed to match through the filter's side
// channel, and only the sign of the difference is kept: out_bit = 1 where the pixel is
// darker than its surroundings (pupil candidates). All of this is the paper's; the
// support and fixed point are this design's choices. Stream in, stream out, one pixel per
// cycle.
module iris_preproc #(
  parameter int unsigned W     = 320,
  parameter int unsigned H     = 240,
  parameter real         SIGMA = 5.0,
  parameter int unsigned R     = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  bio_pkg::pix_t in_pix,
  output logic          out_valid,
  output logic          out_bit
);
  logic              g_v;
  logic signed [9:0] g_d;
  logic [7:0]        g_side;
  logic [15:0]       g_x, g_y;
  gauss_sep #(.DW(10), .SW(8), .SIGMA(SIGMA), .R(R), .W(W), .H(H)) u_g (
    .clk, .rst_n, .in_valid, .in_data({2'b00, in_pix}), .in_side(in_pix),
    .out_valid(g_v), .out_data(g_d), .out_side(g_side), .out_x(g_x), .out_y(g_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_bit <= 1'b0;
    end else begin
      logic signed [10:0] diff;
      diff = 11'(signed'({3'b000, g_side})) - 11'(g_d);
      out_valid <= g_v;
      out_bit   <= diff[10];
    end
  end
endmodule
