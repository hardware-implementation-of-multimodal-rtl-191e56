// gauss_sep: separable streaming Gaussian low-pass filter with an aligned side channel.
// A vertical (2R+1)-tap pass over line buffers is followed by a horizontal (2R+1)-tap
// pass, both built on line_window, so a frame of W*H signed DW-bit samples gives W*H
// filtered samples in raster order. Weights are exp(-k^2/2sigma^2) in FRAC-bit fixed
// point, computed at elaboration and forced to sum to exactly 2^FRAC; image borders
// replicate the centre sample. in_side (SW bits) travels with the sample and comes out
// with the filtered value of the same pixel, which is how later stages get the "delayed
// image" the filter output must be combined with. The paper gives the sigma of each use
// (4 and 2 in the iris enhancement, 5 in iris pre-processing, 1 and 7 in orientation
// estimation); the +-2 sigma support (R = 2 sigma) follows the paper's line-Gaussian
// sizing, and the fixed-point format is this design's choice.
// Lint note: callers often leave out_x/out_y or the flush flag unconnected, and the filter
// uses only part of the helper window's position outputs; the unused-signal warnings stand.
module gauss_sep #(
  parameter int unsigned DW    = 9,
  parameter int unsigned SW    = 1,
  parameter real         SIGMA = 1.0,
  parameter int unsigned R     = 2,
  parameter int unsigned W     = 16,
  parameter int unsigned H     = 16,
  parameter int unsigned FRAC  = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  input  logic [SW-1:0]        in_side,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_data,
  output logic [SW-1:0]        out_side,
  output logic [15:0]          out_x,
  output logic [15:0]          out_y
);
  localparam int unsigned K = 2 * R + 1;

  typedef int wtab_t [K];
  function automatic wtab_t make_w();
    wtab_t w;
    int s;
    s = 0;
    for (int k = 0; k < K; k++) begin
      w[k] = bio_pkg::gauss_raw(k - int'(R), SIGMA, 16);
      s += w[k];
    end
    for (int k = 0; k < K; k++) w[k] = int'((longint'(w[k]) << FRAC) / longint'(s));
    s = 0;
    for (int k = 0; k < K; k++) if (k != int'(R)) s += w[k];
    w[R] = (1 << FRAC) - s;
    return w;
  endfunction
  localparam wtab_t WT = make_w();

  // vertical pass
  logic          v_valid;
  logic [DW+SW-1:0] v_win [K][1];
  logic [15:0]   v_x, v_y;
  logic          v_fl, h_fl;

  line_window #(.DW(DW+SW), .KR(K), .KC(1), .W(W), .H(H)) u_v (
    .clk, .rst_n, .in_valid, .in_data({in_data, in_side}),
    .out_valid(v_valid), .out_win(v_win), .out_x(v_x), .out_y(v_y), .flushing(v_fl));

  function automatic logic signed [DW-1:0] round_sat(input logic signed [63:0] acc);
    logic signed [63:0] q;
    q = (acc + (64'sd1 <<< (FRAC - 1))) >>> FRAC;
    if (q > (64'sd1 <<< (DW - 1)) - 1) return {1'b0, {(DW-1){1'b1}}};
    if (q < -(64'sd1 <<< (DW - 1)))    return {1'b1, {(DW-1){1'b0}}};
    return q[DW-1:0];
  endfunction

  logic signed [DW-1:0] v_sum;
  always_comb begin
    logic signed [63:0] acc;
    acc = '0;
    for (int k = 0; k < K; k++)
      acc += 64'(signed'(v_win[k][0][DW+SW-1:SW])) * 64'(WT[k]);
    v_sum = round_sat(acc);
  end

  // horizontal pass
  logic             h_valid;
  logic [DW+SW-1:0] h_win [1][K];
  line_window #(.DW(DW+SW), .KR(1), .KC(K), .W(W), .H(H)) u_h (
    .clk, .rst_n, .in_valid(v_valid), .in_data({v_sum, v_win[R][0][SW-1:0]}),
    .out_valid(h_valid), .out_win(h_win), .out_x, .out_y, .flushing(h_fl));

  always_comb begin
    logic signed [63:0] acc;
    acc = '0;
    for (int k = 0; k < K; k++)
      acc += 64'(signed'(h_win[0][k][DW+SW-1:SW])) * 64'(WT[k]);
    out_data = round_sat(acc);
  end
  assign out_side  = h_win[0][R][SW-1:0];
  assign out_valid = h_valid;
endmodule
