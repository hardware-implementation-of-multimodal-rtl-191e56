// iris_enhance: local normalisation of the unwrapped iris image. The background f_B is a
// Gaussian (sigma 4) of the image and is subtracted from the pixel, delayed through the
// filter's side channel, giving d. The local contrast is |d| compressed by the power law
// x^0.75 (a 256-entry table, 255 * (x / 255)^0.75, built at elaboration), smoothed by a
// second Gaussian (sigma 2) and clipped to [50, 255]; d travels with it through the second
// filter. The output is clip(128 + 128 * d / contrast, 0, 255). The chain, both sigmas, the
// exponent, the clipping ranges, the gain and the offset are those of the paper's block
// diagram; scaling the power law so that its output spans 0..255 (needed for the [50, 255]
// clip to act as a floor rather than a constant) is this design's choice. A row tag
// (16 bits) travels with each pixel. Stream in, stream out.
module iris_enhance #(
  parameter int unsigned W      = 360,
  parameter int unsigned H      = 32,
  parameter real         SIGMA1 = 4.0,
  parameter int unsigned R1     = 8,
  parameter real         SIGMA2 = 2.0,
  parameter int unsigned R2     = 4,
  parameter real         GAMMA  = 0.75,
  parameter int unsigned CMIN   = 50
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  bio_pkg::pix_t in_pix,
  input  logic [15:0]   in_tag,
  output logic          out_valid,
  output bio_pkg::pix_t out_pix,
  output logic [15:0]   out_tag
);
  typedef logic [7:0] ptab_t [256];
  function automatic ptab_t make_pow();
    ptab_t t;
    for (int i = 0; i < 256; i++)
      t[i] = 8'(int'(255.0 * $pow(real'(i) / 255.0, GAMMA) + 0.5));
    return t;
  endfunction
  localparam ptab_t PW = make_pow();

  logic              b_v;
  logic signed [9:0] b_d;
  logic [23:0]       b_side;
  logic [15:0]       bx, by;
  gauss_sep #(.DW(10), .SW(24), .SIGMA(SIGMA1), .R(R1), .W(W), .H(H)) u_bg (
    .clk, .rst_n, .in_valid, .in_data({2'b00, in_pix}), .in_side({in_tag, in_pix}),
    .out_valid(b_v), .out_data(b_d), .out_side(b_side), .out_x(bx), .out_y(by));

  // background removal and contrast
  logic              s1_v;
  logic signed [9:0] s1_d;
  logic [7:0]        s1_p;
  logic [15:0]       s1_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_d <= '0; s1_p <= '0; s1_tag <= '0;
    end else begin
      logic signed [10:0] d;
      logic [10:0] m;
      d = 11'(signed'({3'b000, b_side[7:0]})) - 11'(b_d);
      m = d[10] ? 11'(-d) : 11'(d);
      s1_v   <= b_v;
      s1_d   <= 10'(d);
      s1_p   <= (m > 255) ? PW[255] : PW[m[7:0]];
      s1_tag <= b_side[23:8];
    end
  end

  logic              c_v;
  logic signed [9:0] c_d;
  logic [25:0]       c_side;
  logic [15:0]       cx, cy;
  gauss_sep #(.DW(10), .SW(26), .SIGMA(SIGMA2), .R(R2), .W(W), .H(H)) u_ct (
    .clk, .rst_n, .in_valid(s1_v), .in_data({2'b00, s1_p}), .in_side({s1_tag, s1_d}),
    .out_valid(c_v), .out_data(c_d), .out_side(c_side), .out_x(cx), .out_y(cy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pix <= '0; out_tag <= '0;
    end else begin
      int c, d, o;
      c = int'(c_d);
      if (c < int'(CMIN)) c = CMIN;
      if (c > 255) c = 255;
      d = int'(signed'(c_side[9:0]));
      o = 128 + (d * 128) / c;
      out_valid <= c_v;
      out_pix   <= (o < 0) ? 8'd0 : (o > 255) ? 8'd255 : 8'(o);
      out_tag   <= c_side[25:10];
    end
  end
endmodule
