// line_window: sliding KR x KC neighbourhood over a raster-scanned image stream.
// Pixels arrive one per in_valid in raster order, W per row, H rows per frame. KR-1
// line buffers hold the previous rows; a KR x KC register window shifts one column per
// pixel. After the last pixel of a frame the block feeds itself dummy pixels (one per
// cycle) until every centre position has been produced, so each frame of W*H inputs gives
// exactly W*H outputs in raster order. Taps that fall outside the image are replaced by the
// centre pixel (PAD_CENTRE=1) or by PAD_VAL. out_win is valid with out_valid; out_x/out_y
// give the centre position. Latency: the window centre trails the input by
// (KR/2)*W + KC/2 pixels plus one register. A new frame must not start while the block is
// still flushing the previous one (flushing = 1).
// Lint notes: the position counters are 16 bits whatever W and H are, so indexing a line
// buffer with them and comparing them with W - 1 draws width warnings; the values never
// exceed the image size, and the warnings stand.
module line_window #(
  parameter int unsigned DW = 8,
  parameter int unsigned KR = 3,
  parameter int unsigned KC = 3,
  parameter int unsigned W  = 16,
  parameter int unsigned H  = 16,
  parameter bit          PAD_CENTRE = 1'b1,
  parameter logic [DW-1:0] PAD_VAL = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [DW-1:0]     in_data,
  output logic              out_valid,
  output logic [DW-1:0]     out_win [KR][KC],
  output logic [15:0]       out_x,
  output logic [15:0]       out_y,
  output logic              flushing
);
  localparam int unsigned RR  = KR / 2;
  localparam int unsigned RC  = KC / 2;
  localparam int unsigned LAT = RR * W + RC;
  localparam int unsigned NLB = (KR > 1) ? KR - 1 : 1;

  logic [DW-1:0] lb  [NLB][W];
  logic [DW-1:0] win [KR][KC];
  logic [15:0]   ix, iy;          // input position (including flush positions)
  logic [31:0]   icnt;            // pixels taken in this frame
  logic [31:0]   ocnt;            // centres produced in this frame
  logic [15:0]   cx, cy;          // centre of the window now held
  logic          wvalid;
  logic          adv;
  logic [DW-1:0] din;
  logic [DW-1:0] col [KR];

  assign flushing = (icnt >= W * H);
  assign adv      = flushing ? 1'b1 : in_valid;
  assign din      = flushing ? '0 : in_data;

  always_comb begin
    for (int r = 0; r < KR; r++) begin
      if (r == KR - 1) col[r] = din;
      else             col[r] = lb[KR-2-r][ix];
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      if (KR > 1) begin
        lb[0][ix] <= din;
        for (int j = 1; j < NLB; j++) lb[j][ix] <= lb[j-1][ix];
      end
      for (int r = 0; r < KR; r++) begin
        for (int c = 0; c < KC - 1; c++) win[r][c] <= win[r][c+1];
        win[r][KC-1] <= col[r];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ix <= '0; iy <= '0; icnt <= '0; ocnt <= '0;
      cx <= '0; cy <= '0; wvalid <= 1'b0;
    end else begin
      wvalid <= 1'b0;
      if (adv) begin
        if (ix == W - 1) begin ix <= '0; iy <= iy + 16'd1; end
        else ix <= ix + 16'd1;
        icnt <= icnt + 32'd1;
        if (icnt >= LAT) begin
          wvalid <= 1'b1;
          if (ocnt == 0) begin cx <= '0; cy <= '0; end
          else if (cx == W - 1) begin cx <= '0; cy <= cy + 16'd1; end
          else cx <= cx + 16'd1;
          if (ocnt == W * H - 1) begin
            ocnt <= '0; icnt <= '0; ix <= '0; iy <= '0;
          end else begin
            ocnt <= ocnt + 32'd1;
          end
        end
      end
    end
  end

  // Replace taps outside the image.
  always_comb begin
    for (int r = 0; r < KR; r++) begin
      for (int c = 0; c < KC; c++) begin
        int tx, ty;
        tx = int'(cx) - int'(RC) + c;
        ty = int'(cy) - int'(RR) + r;
        if (tx < 0 || tx >= int'(W) || ty < 0 || ty >= int'(H))
          out_win[r][c] = PAD_CENTRE ? win[RR][RC] : PAD_VAL;
        else
          out_win[r][c] = win[r][c];
      end
    end
  end

  assign out_valid = wvalid;
  assign out_x = cx;
  assign out_y = cy;
endmodule
