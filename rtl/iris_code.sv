// iris_code: bit-plane slicing of the enhanced iris image into the iris code. Of the
// eight bit planes of each pixel, planes 0 and 7 are discarded and planes 1..6 are kept,
// each normalised to 0/1, so every pixel contributes a 6-bit code word; the words are
// numbered in raster order, giving the M x 6 code of the paper (M = rows x angles). A
// seventh bit marks whether the pixel lies inside the iris (its row is above the limbic
// boundary); the matcher compares only such words. Planes 1..6 are the paper's (it also
// once speaks of 5 planes; the 6 it states repeatedly are used). The mask bit and the
// word numbering are this design's choices. One word per cycle, one cycle latency.
module iris_code #(
  parameter int unsigned M = 360 * 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  bio_pkg::pix_t in_pix,
  input  logic [15:0]   in_row,
  input  logic [7:0]    limbic,
  output logic          out_valid,
  output logic [$clog2(M)-1:0] out_addr,
  output logic [6:0]    out_word,
  output logic          out_last
);
  localparam int unsigned AW = $clog2(M);
  logic [AW-1:0] cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; out_valid <= 1'b0; out_addr <= '0; out_word <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && (cnt == AW'(M - 1));
      if (in_valid) begin
        out_addr <= cnt;
        out_word <= {(in_row < 16'(limbic)), in_pix[6:1]};
        cnt <= (cnt == AW'(M - 1)) ? '0 : cnt + 1'b1;
      end
    end
  end
endmodule
