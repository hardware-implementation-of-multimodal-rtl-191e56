// fp_orientation: ridge orientation field of a fingerprint stream.
// Sobel derivatives Gx, Gy (a Gaussian-smoothed derivative) give the per-pixel products
// Gxx, Gyy, Gxy, which are smoothed by a Gaussian of sigma 1. The doubled-angle vector
// (Gxx - Gyy, 2 Gxy) is smoothed by a Gaussian of sigma 7 and turned into an angle 2phi by
// the CORDIC; the ridge orientation is theta = phi + 90 degrees. The output is a 7-bit
// orientation, 128 units per 180 degrees, one per pixel in raster order. The paper gives
// the method and both sigmas; the Sobel kernel, the +-2 sigma supports and the widths are
// this design's choices. Latency is about 18 rows.
module fp_orientation #(
  parameter int unsigned W = 296,
  parameter int unsigned H = 560,
  parameter real   SIGMA1  = 1.0,
  parameter int unsigned R1 = 2,
  parameter real   SIGMA2  = 7.0,
  parameter int unsigned R2 = 14
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  bio_pkg::pix_t in_pix,
  output logic          out_valid,
  output logic [6:0]    out_theta
);
  localparam int unsigned CW = 24;
  logic       w_valid, w_fl;
  logic [7:0] win [3][3];
  logic [15:0] wx, wy;
  line_window #(.DW(8), .KR(3), .KC(3), .W(W), .H(H)) u_win (
    .clk, .rst_n, .in_valid, .in_data(in_pix),
    .out_valid(w_valid), .out_win(win), .out_x(wx), .out_y(wy), .flushing(w_fl));

  logic                 g_v;
  logic signed [CW-1:0] gxx, gyy, gxy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_v <= 1'b0; gxx <= '0; gyy <= '0; gxy <= '0;
    end else begin
      int gx, gy;
      gx = (int'(win[0][2]) + 2*int'(win[1][2]) + int'(win[2][2]))
         - (int'(win[0][0]) + 2*int'(win[1][0]) + int'(win[2][0]));
      gy = (int'(win[2][0]) + 2*int'(win[2][1]) + int'(win[2][2]))
         - (int'(win[0][0]) + 2*int'(win[0][1]) + int'(win[0][2]));
      g_v <= w_valid;
      gxx <= CW'((gx * gx) >>> 2);
      gyy <= CW'((gy * gy) >>> 2);
      gxy <= CW'((gx * gy) >>> 2);
    end
  end

  logic                 s1_v, s1_vb, s1_vc;
  logic signed [CW-1:0] sxx, syy, sxy;
  logic [0:0]           sd0, sd1, sd2;
  logic [15:0]          x1a, y1a, x1b, y1b, x1c, y1c;
  gauss_sep #(.DW(CW), .SW(1), .SIGMA(SIGMA1), .R(R1), .W(W), .H(H)) u_sxx (
    .clk, .rst_n, .in_valid(g_v), .in_data(gxx), .in_side(1'b0),
    .out_valid(s1_v), .out_data(sxx), .out_side(sd0), .out_x(x1a), .out_y(y1a));
  gauss_sep #(.DW(CW), .SW(1), .SIGMA(SIGMA1), .R(R1), .W(W), .H(H)) u_syy (
    .clk, .rst_n, .in_valid(g_v), .in_data(gyy), .in_side(1'b0),
    .out_valid(s1_vb), .out_data(syy), .out_side(sd1), .out_x(x1b), .out_y(y1b));
  gauss_sep #(.DW(CW), .SW(1), .SIGMA(SIGMA1), .R(R1), .W(W), .H(H)) u_sxy (
    .clk, .rst_n, .in_valid(g_v), .in_data(gxy), .in_side(1'b0),
    .out_valid(s1_vc), .out_data(sxy), .out_side(sd2), .out_x(x1c), .out_y(y1c));

  // doubled-angle components
  logic signed [CW-1:0] da, db;
  assign da = (sxx - syy) >>> 1;
  assign db = sxy;

  logic                 s2_v, s2_vb;
  logic signed [CW-1:0] fa, fb;
  logic [0:0]           sd3, sd4;
  logic [15:0]          x2a, y2a, x2b, y2b;
  gauss_sep #(.DW(CW), .SW(1), .SIGMA(SIGMA2), .R(R2), .W(W), .H(H)) u_fa (
    .clk, .rst_n, .in_valid(s1_v), .in_data(da), .in_side(1'b0),
    .out_valid(s2_v), .out_data(fa), .out_side(sd3), .out_x(x2a), .out_y(y2a));
  gauss_sep #(.DW(CW), .SW(1), .SIGMA(SIGMA2), .R(R2), .W(W), .H(H)) u_fb (
    .clk, .rst_n, .in_valid(s1_v), .in_data(db), .in_side(1'b0),
    .out_valid(s2_vb), .out_data(fb), .out_side(sd4), .out_x(x2b), .out_y(y2b));

  logic          c_v;
  logic [CW-1:0] c_mag;
  logic [7:0]    c_ang;
  cordic #(.IW(CW), .ITER(14)) u_cordic (
    .clk, .rst_n, .in_valid(s2_v), .in_x(fa), .in_y(fb),
    .out_valid(c_v), .out_mag(c_mag), .out_ang(c_ang));

  // c_ang is 2*phi in 256 units per turn, so phi in 128 units per 180 degrees is c_ang/2
  // expressed as 7 bits; adding 90 degrees is adding 64.
  logic [7:0] th;
  assign th = {1'b0, c_ang[7:1]} + 8'd64 + {7'd0, c_ang[0]};
  assign out_valid = c_v;
  assign out_theta = th[6:0];
endmodule
