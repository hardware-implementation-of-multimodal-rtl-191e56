// fp_binarise_thin: binarisation by a fixed threshold followed by NPASS rounds of
// Zhang-Suen thinning, all streaming. A pixel at or above THRESH becomes 1 (valley /
// background), below it 0 (ridge), as in the paper's convention; the paper states that a
// simple threshold suffices after normalisation. Thinning deletes ridge pixels whose 8
// neighbours show 2..6 ridge neighbours, exactly one background-to-ridge transition around
// the circle and the sub-iteration's two "no-neighbour" conditions; each round is two
// sub-iterations, each a 3x3 line_window stage. A fully converged thinning needs as many
// rounds as the widest ridge is thick; the stream form fixes the number of rounds
// (NPASS), which is this design's choice, as is THRESH. A 7-bit side value (the
// orientation) is carried along with each pixel. Pixels outside the image count as
// background.
module fp_binarise_thin #(
  parameter int unsigned W      = 296,
  parameter int unsigned H      = 560,
  parameter int unsigned THRESH = 128,
  parameter int unsigned NPASS  = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  bio_pkg::pix_t in_pix,
  input  logic [6:0]    in_side,
  output logic          out_valid,
  output logic          out_bit,
  output logic [6:0]    out_side,
  output logic [31:0]   deleted
);
  localparam int unsigned NS = 2 * NPASS;

  logic       sv [NS+1];
  logic [7:0] sd [NS+1];
  logic [31:0] del_cnt [NS];

  assign sv[0] = in_valid;
  assign sd[0] = {in_side, (32'(in_pix) >= THRESH) ? 1'b1 : 1'b0};

  for (genvar s = 0; s < NS; s++) begin : g_sub
    logic       w_v, w_fl;
    logic [7:0] win [3][3];
    logic [15:0] w_x, w_y;
    line_window #(.DW(8), .KR(3), .KC(3), .W(W), .H(H), .PAD_CENTRE(1'b0), .PAD_VAL(8'h01)) u_w (
      .clk, .rst_n, .in_valid(sv[s]), .in_data(sd[s]),
      .out_valid(w_v), .out_win(win), .out_x(w_x), .out_y(w_y), .flushing(w_fl));

    logic p1, p2, p3, p4, p5, p6, p7, p8, p9, kill;
    // ridge indicators (ridge = 0 in the image)
    assign p1 = ~win[1][1][0];
    assign p2 = ~win[0][1][0];
    assign p3 = ~win[0][2][0];
    assign p4 = ~win[1][2][0];
    assign p5 = ~win[2][2][0];
    assign p6 = ~win[2][1][0];
    assign p7 = ~win[2][0][0];
    assign p8 = ~win[1][0][0];
    assign p9 = ~win[0][0][0];
    always_comb begin
      int b, a;
      logic [8:0] ring;
      ring = {p2, p9, p8, p7, p6, p5, p4, p3, p2};
      b = int'(p2) + int'(p3) + int'(p4) + int'(p5) + int'(p6) + int'(p7) + int'(p8) + int'(p9);
      a = 0;
      for (int i = 0; i < 8; i++) if (!ring[i] && ring[i+1]) a++;
      if (s % 2 == 0)
        kill = p1 && b >= 2 && b <= 6 && a == 1 && !(p2 && p4 && p6) && !(p4 && p6 && p8);
      else
        kill = p1 && b >= 2 && b <= 6 && a == 1 && !(p2 && p4 && p8) && !(p2 && p6 && p8);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        sv[s+1] <= 1'b0; sd[s+1] <= '0; del_cnt[s] <= '0;
      end else begin
        sv[s+1] <= w_v;
        sd[s+1] <= {win[1][1][7:1], kill ? 1'b1 : win[1][1][0]};
        if (w_v && kill) del_cnt[s] <= del_cnt[s] + 32'd1;
      end
    end
  end

  always_comb begin
    deleted = '0;
    for (int s = 0; s < NS; s++) deleted += del_cnt[s];
  end
  assign out_valid = sv[NS];
  assign out_bit   = sd[NS][0];
  assign out_side  = sd[NS][7:1];
endmodule
