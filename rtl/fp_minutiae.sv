// fp_minutiae: crossing-number minutiae detector on the thinned fingerprint stream.
// For every ridge pixel (value 0) the crossing number CN = 1/2 sum |P(i) - P(i+1)| is
// taken over its 8 neighbours in circular order: CN = 1 marks a ridge ending, CN = 3 a
// bifurcation. To drop false minutiae at the edge of the print, a candidate is kept only
// if a ridge pixel exists within DIST pixels to its left, right, top and bottom, as the
// paper describes; the distance itself is this design's choice. A (2 DIST + 1)-square
// line_window supplies the neighbourhood; pixels outside the image are background. Each
// accepted minutia is emitted as a bio_pkg::minutia_t record (position, the local ridge
// orientation carried on the side channel, type) with out_valid for one cycle.
module fp_minutiae #(
  parameter int unsigned W    = 296,
  parameter int unsigned H    = 560,
  parameter int unsigned DIST = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_bit,
  input  logic [6:0]        in_theta,
  output logic              out_valid,
  output bio_pkg::minutia_t out_min,
  output logic              frame_done,
  output logic [31:0]       n_end,
  output logic [31:0]       n_bif,
  output logic [31:0]       n_rejected
);
  localparam int unsigned K = 2 * DIST + 1;
  localparam int unsigned C = DIST;

  logic        w_v, w_fl;
  logic [7:0]  win [K][K];
  logic [15:0] w_x, w_y;
  line_window #(.DW(8), .KR(K), .KC(K), .W(W), .H(H), .PAD_CENTRE(1'b0), .PAD_VAL(8'h01)) u_w (
    .clk, .rst_n, .in_valid, .in_data({in_theta, in_bit}),
    .out_valid(w_v), .out_win(win), .out_x(w_x), .out_y(w_y), .flushing(w_fl));

  logic [7:0] ring;     // ridge indicators N, NE, E, SE, S, SW, W, NW
  logic       centre;
  int         cn;
  logic       l_ok, r_ok, u_ok, d_ok;
  always_comb begin
    int t;
    centre = ~win[C][C][0];
    ring = {~win[C-1][C-1][0], ~win[C][C-1][0], ~win[C+1][C-1][0], ~win[C+1][C][0],
            ~win[C+1][C+1][0], ~win[C][C+1][0], ~win[C-1][C+1][0], ~win[C-1][C][0]};
    t = 0;
    for (int i = 0; i < 8; i++) if (ring[i] != ring[(i+1)%8]) t++;
    cn = t / 2;
    l_ok = 1'b0; r_ok = 1'b0; u_ok = 1'b0; d_ok = 1'b0;
    for (int k = 1; k <= int'(DIST); k++) begin
      if (!win[C][C-k][0]) l_ok = 1'b1;
      if (!win[C][C+k][0]) r_ok = 1'b1;
      if (!win[C-k][C][0]) u_ok = 1'b1;
      if (!win[C+k][C][0]) d_ok = 1'b1;
    end
  end

  logic cand, in_print;
  assign cand   = w_v && centre && (cn == 1 || cn == 3);
  assign in_print = l_ok && r_ok && u_ok && d_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_min <= '0; frame_done <= 1'b0;
      n_end <= '0; n_bif <= '0; n_rejected <= '0;
    end else begin
      out_valid  <= cand && in_print;
      frame_done <= w_v && (w_x == 16'(W - 1)) && (w_y == 16'(H - 1));
      out_min.x   <= w_x[bio_pkg::COORD_W-1:0];
      out_min.y   <= w_y[bio_pkg::COORD_W-1:0];
      out_min.ang <= {1'b0, win[C][C][7:1]};
      out_min.typ <= (cn == 3);
      if (cand && in_print && cn == 1) n_end <= n_end + 32'd1;
      if (cand && in_print && cn == 3) n_bif <= n_bif + 32'd1;
      if (cand && !in_print) n_rejected <= n_rejected + 32'd1;
    end
  end
endmodule
