// fp_guided_gauss: orientation-steered line Gaussian that enhances fingerprint ridges.
// Each pixel arrives with its ridge orientation theta (7 bits, 128 units per 180 degrees).
// A small isotropic 5x5 Gaussian (gauss_sep, sigma 1) smooths the image first; theta
// travels alongside as the side channel. A TAPS x TAPS window (17 x 17: sigma_x = 4, +-2
// sigma) is then formed and, for the centre pixel's theta, one pixel per tap is picked
// along the ridge line through the centre by nearest-neighbour rounding: for angles that
// are mainly horizontal (hwind) one pixel from each column, dy = round(k tan theta); for
// mainly vertical angles (vwind) one from each row, dx = round(k cot theta). The picked
// pixels are weighted by the 1-D Gaussian exp(-k^2/2 sigma_x^2) and summed; the hwind or
// vwind sum is selected by the angle. The structure, the 17-tap length and sigma_x = 4
// follow the paper (its figure draws a 25-tap variant); the sigma of the 5x5 pre-filter,
// the offset tables (computed at elaboration) and the fixed point are this design's.
module fp_guided_gauss #(
  parameter int unsigned W       = 296,
  parameter int unsigned H       = 560,
  parameter int unsigned TAPS    = 17,
  parameter real         SIGMA_X = 4.0,
  parameter real         SIGMA_P = 1.0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  bio_pkg::pix_t in_pix,
  input  logic [6:0]    in_theta,
  output logic          out_valid,
  output bio_pkg::pix_t out_pix,
  output logic [6:0]    out_theta,
  output logic          out_hwind
);
  localparam int unsigned RT   = TAPS / 2;
  localparam int unsigned FRAC = 14;

  typedef int otab_t [128*TAPS];
  function automatic otab_t make_off(input bit want_dy);
    otab_t t;
    for (int a = 0; a < 128; a++) begin
      real th, c, s;
      th = real'(a) * bio_pkg::PI / 128.0;
      c = $cos(th); s = $sin(th);
      for (int k = 0; k < TAPS; k++) begin
        int kk, dx, dy;
        kk = k - int'(RT);
        if ((c < 0 ? -c : c) >= (s < 0 ? -s : s)) begin
          dx = kk; dy = int'($floor(real'(kk) * s / c + 0.5));
        end else begin
          dy = kk; dx = int'($floor(real'(kk) * c / s + 0.5));
        end
        if (dx > int'(RT)) dx = RT; if (dx < -int'(RT)) dx = -int'(RT);
        if (dy > int'(RT)) dy = RT; if (dy < -int'(RT)) dy = -int'(RT);
        t[a*TAPS+k] = want_dy ? dy : dx;
      end
    end
    return t;
  endfunction
  localparam otab_t DX = make_off(1'b0);
  localparam otab_t DY = make_off(1'b1);

  typedef int wtab_t [TAPS];
  function automatic wtab_t make_w();
    wtab_t w;
    int s;
    s = 0;
    for (int k = 0; k < TAPS; k++) begin
      w[k] = bio_pkg::gauss_raw(k - int'(RT), SIGMA_X, 16);
      s += w[k];
    end
    for (int k = 0; k < TAPS; k++) w[k] = int'((longint'(w[k]) << FRAC) / longint'(s));
    s = 0;
    for (int k = 0; k < TAPS; k++) if (k != int'(RT)) s += w[k];
    w[RT] = (1 << FRAC) - s;
    return w;
  endfunction
  localparam wtab_t WT = make_w();

  // isotropic pre-filter
  logic              p_v;
  logic signed [9:0] p_d;
  logic [6:0]        p_th;
  logic [15:0]       p_x, p_y;
  gauss_sep #(.DW(10), .SW(7), .SIGMA(SIGMA_P), .R(2), .W(W), .H(H)) u_pre (
    .clk, .rst_n, .in_valid, .in_data({2'b00, in_pix}), .in_side(in_theta),
    .out_valid(p_v), .out_data(p_d), .out_side(p_th), .out_x(p_x), .out_y(p_y));

  logic [7:0] p_pix;
  assign p_pix = p_d[9] ? 8'd0 : (p_d[8] ? 8'd255 : p_d[7:0]);

  // steering window
  logic        w_v, w_fl;
  logic [14:0] win [TAPS][TAPS];
  logic [15:0] w_x, w_y;
  line_window #(.DW(15), .KR(TAPS), .KC(TAPS), .W(W), .H(H)) u_win (
    .clk, .rst_n, .in_valid(p_v), .in_data({p_th, p_pix}),
    .out_valid(w_v), .out_win(win), .out_x(w_x), .out_y(w_y), .flushing(w_fl));

  logic [6:0] th_c;
  assign th_c = win[RT][RT][14:8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pix <= '0; out_theta <= '0; out_hwind <= 1'b0;
    end else begin
      logic [31:0] acc;
      acc = '0;
      for (int k = 0; k < TAPS; k++) begin
        int ry, rx;
        ry = int'(RT) + DY[int'(th_c)*TAPS+k];
        rx = int'(RT) + DX[int'(th_c)*TAPS+k];
        acc += 32'(win[ry][rx][7:0]) * 32'(WT[k]);
      end
      acc = (acc + (32'd1 << (FRAC - 1))) >> FRAC;
      out_valid <= w_v;
      out_pix   <= (acc > 255) ? 8'd255 : acc[7:0];
      out_theta <= th_c;
      // hwind covers orientations within 45 degrees of horizontal
      out_hwind <= (th_c < 7'd32) || (th_c >= 7'd96);
    end
  end
endmodule
