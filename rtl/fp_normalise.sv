// fp_normalise: local normalisation of a fingerprint with background noise suppression.
// For each pixel the mean m and variance v of a K x K neighbourhood are computed from a
// line_window; the output is 128 + SCALE * M * (I - m) / sqrt(v), clipped to 0..255, with
// M = 1 - exp(-v / (2 C^2)) (the paper's suppression factor, C = 0.3 on a 0..1 grey scale,
// i.e. 2C^2 = 0.18 * 255^2). M is read from a 256-entry table indexed by v/64 and built at
// elaboration. The window size K, the output scale and offset and the table step are this
// design's choices; the formula and C follow the paper. Stream in, stream out, one pixel
// per cycle, latency (K/2) rows + K/2 pixels + 3 cycles.
module fp_normalise #(
  parameter int unsigned W     = 296,
  parameter int unsigned H     = 560,
  parameter int unsigned K     = 9,
  parameter real         C     = 0.3,
  parameter int unsigned SCALE = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  bio_pkg::pix_t    in_pix,
  output logic             out_valid,
  output bio_pkg::pix_t    out_pix
);
  localparam int unsigned N = K * K;
  typedef logic [7:0] mtab_t [256];
  function automatic mtab_t make_m();
    mtab_t t;
    real c2;
    c2 = 2.0 * (C * 255.0) * (C * 255.0);
    for (int i = 0; i < 256; i++) begin
      real m;
      m = 1.0 - $exp(-(real'(i) * 64.0) / c2);
      t[i] = 8'(int'(m * 255.0));
    end
    return t;
  endfunction
  localparam mtab_t MT = make_m();

  logic       w_valid, w_fl;
  logic [7:0] win [K][K];
  logic [15:0] wx, wy;
  line_window #(.DW(8), .KR(K), .KC(K), .W(W), .H(H)) u_win (
    .clk, .rst_n, .in_valid, .in_data(in_pix),
    .out_valid(w_valid), .out_win(win), .out_x(wx), .out_y(wy), .flushing(w_fl));

  // stage 1: sums
  logic        s1_v;
  logic [7:0]  s1_c;
  logic [15:0] s1_mean;
  logic [31:0] s1_var;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_c <= '0; s1_mean <= '0; s1_var <= '0;
    end else begin
      logic [31:0] s, ss, mean;
      s = '0; ss = '0;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) begin
          s  += 32'(win[r][c]);
          ss += 32'(win[r][c]) * 32'(win[r][c]);
        end
      mean = (s + N / 2) / N;
      s1_v    <= w_valid;
      s1_c    <= win[K/2][K/2];
      s1_mean <= 16'(mean);
      s1_var  <= (ss / N > mean * mean) ? ss / N - mean * mean : 32'd0;
    end
  end

  // stage 2: standard deviation and suppression factor
  logic              s2_v;
  logic signed [9:0] s2_d;
  logic [15:0]       s2_sd;
  logic [7:0]        s2_m;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_d <= '0; s2_sd <= '0; s2_m <= '0;
    end else begin
      logic [15:0] sd;
      sd = bio_pkg::isqrt32(s1_var);
      s2_v  <= s1_v;
      s2_d  <= 10'(signed'({2'b0, s1_c}) - signed'({2'b0, s1_mean[7:0]}));
      s2_sd <= (sd == 0) ? 16'd1 : sd;
      s2_m  <= (s1_var >= 32'd16384) ? MT[255] : MT[s1_var[13:6]];
    end
  end

  // stage 3: divide, weight, offset, clip
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pix <= '0;
    end else begin
      logic signed [31:0] g, o;
      g = (int'(s2_d) * int'(SCALE)) / int'(s2_sd);
      o = 128 + ((g * int'(s2_m)) >>> 8);
      out_valid <= s2_v;
      out_pix   <= (o < 0) ? 8'd0 : (o > 255) ? 8'd255 : 8'(o);
    end
  end
endmodule
