// fp_m1: memory M1 of the fingerprint matcher. It has two sub-memories: "minutiae",
// holding the extracted minutiae (position, angle, type) and "segment", holding for each
// minutia the segment to its nearest neighbour (length, relative angle) that the
// alignment block derives. Each sub-memory holds two banks of NMAX entries: bank 0 for
// the input print, bank 1 for the enrolled template. Both have one synchronous write port
// and two asynchronous read ports (a and b), so the alignment block can compare two
// entries per cycle. The split into minutiae and segment follows the paper; bank count,
// depth and port structure are this design's choices.
module fp_m1 #(
  parameter int unsigned NMAX = 64
) (
  input  logic              clk,
  input  logic              min_we,
  input  logic              min_wbank,
  input  logic [$clog2(NMAX)-1:0] min_waddr,
  input  bio_pkg::minutia_t min_wdata,
  input  logic              min_abank,
  input  logic [$clog2(NMAX)-1:0] min_aaddr,
  output bio_pkg::minutia_t min_adata,
  input  logic              min_bbank,
  input  logic [$clog2(NMAX)-1:0] min_baddr,
  output bio_pkg::minutia_t min_bdata,
  input  logic              seg_we,
  input  logic              seg_wbank,
  input  logic [$clog2(NMAX)-1:0] seg_waddr,
  input  bio_pkg::segment_t seg_wdata,
  input  logic              seg_abank,
  input  logic [$clog2(NMAX)-1:0] seg_aaddr,
  output bio_pkg::segment_t seg_adata,
  input  logic              seg_bbank,
  input  logic [$clog2(NMAX)-1:0] seg_baddr,
  output bio_pkg::segment_t seg_bdata
);
  bio_pkg::minutia_t mins [2][NMAX];
  bio_pkg::segment_t segs [2][NMAX];

  always_ff @(posedge clk) begin
    if (min_we) mins[min_wbank][min_waddr] <= min_wdata;
    if (seg_we) segs[seg_wbank][seg_waddr] <= seg_wdata;
  end
  assign min_adata = mins[min_abank][min_aaddr];
  assign min_bdata = mins[min_bbank][min_baddr];
  assign seg_adata = segs[seg_abank][seg_aaddr];
  assign seg_bdata = segs[seg_bbank][seg_baddr];
endmodule
