// iris_morph: morphological opening of the binary pupil-candidate image: a K x K erosion
// (a pixel stays 1 only if its whole neighbourhood is 1) followed by a K x K dilation (a
// pixel becomes 1 if any neighbour is 1). This removes eyelash and noise specks smaller
// than the structuring element while keeping the pupil's shape. The two operators and
// their order are the paper's; the square 3x3 structuring element is this design's
// choice. Outside the image the erosion sees 1s and the dilation sees 0s, so borders do
// not erode. Stream in, stream out.
module iris_morph #(
  parameter int unsigned W = 320,
  parameter int unsigned H = 240,
  parameter int unsigned K = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_bit,
  output logic out_valid,
  output logic out_bit
);
  logic        e_v, e_fl, d_v, d_fl;
  logic [0:0]  ew [K][K];
  logic [0:0]  dw [K][K];
  logic [15:0] ex, ey, dx, dy;
  logic        er_v, er_b;

  line_window #(.DW(1), .KR(K), .KC(K), .W(W), .H(H), .PAD_CENTRE(1'b0), .PAD_VAL(1'b1)) u_e (
    .clk, .rst_n, .in_valid, .in_data(in_bit),
    .out_valid(e_v), .out_win(ew), .out_x(ex), .out_y(ey), .flushing(e_fl));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      er_v <= 1'b0; er_b <= 1'b0;
    end else begin
      logic a;
      a = 1'b1;
      for (int r = 0; r < K; r++) for (int c = 0; c < K; c++) a &= ew[r][c][0];
      er_v <= e_v; er_b <= a;
    end
  end

  line_window #(.DW(1), .KR(K), .KC(K), .W(W), .H(H), .PAD_CENTRE(1'b0), .PAD_VAL(1'b0)) u_d (
    .clk, .rst_n, .in_valid(er_v), .in_data(er_b),
    .out_valid(d_v), .out_win(dw), .out_x(dx), .out_y(dy), .flushing(d_fl));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_bit <= 1'b0;
    end else begin
      logic o;
      o = 1'b0;
      for (int r = 0; r < K; r++) for (int c = 0; c < K; c++) o |= dw[r][c][0];
      out_valid <= d_v; out_bit <= o;
    end
  end
endmodule
