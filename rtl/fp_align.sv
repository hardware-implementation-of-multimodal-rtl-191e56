// fp_align: pre-alignment of the fingerprint matcher: finds the best pair of minutiae,
// one from the input print and one from the template, to serve as the common reference.
// Phase 1 (segments): for every minutia of both sets it scans its own set for the nearest
// other minutia and writes into M1's segment memory the segment length (integer square
// root of the squared distance, saturated at 255) and the neighbour's angle relative to
// the minutia. Phase 2 (pairing): for every input/template pair of the same type it forms
// the cost |len_i - len_j| + angular distance of the relative angles and keeps the pair
// of lowest cost. One pair is examined per cycle, so the search takes about
// n_in^2 + n_tp^2 + n_in*n_tp cycles. The paper states that the best pair is searched and
// that M1 holds segments; the nearest-neighbour segment and the cost are this design's
// choices. found is low if no pair of equal type exists.
module fp_align #(
  parameter int unsigned NMAX = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [$clog2(NMAX):0] n_in,
  input  logic [$clog2(NMAX):0] n_tp,
  output logic              min_abank,
  output logic [$clog2(NMAX)-1:0] min_aaddr,
  input  bio_pkg::minutia_t min_adata,
  output logic              min_bbank,
  output logic [$clog2(NMAX)-1:0] min_baddr,
  input  bio_pkg::minutia_t min_bdata,
  output logic              seg_we,
  output logic              seg_wbank,
  output logic [$clog2(NMAX)-1:0] seg_waddr,
  output bio_pkg::segment_t seg_wdata,
  output logic              seg_abank,
  output logic [$clog2(NMAX)-1:0] seg_aaddr,
  input  bio_pkg::segment_t seg_adata,
  output logic              seg_bbank,
  output logic [$clog2(NMAX)-1:0] seg_baddr,
  input  bio_pkg::segment_t seg_bdata,
  output logic              done,
  output logic              found,
  output logic [$clog2(NMAX)-1:0] ref_in,
  output logic [$clog2(NMAX)-1:0] ref_tp
);
  localparam int unsigned AW = $clog2(NMAX);
  typedef enum logic [1:0] {IDLE, SEG, PAIR} state_t;
  state_t st;
  logic        bank;
  logic [AW:0] i, j;
  logic [31:0] best_d2;
  bio_pkg::ang_t best_ang;
  logic [9:0]  best_cost;
  logic [AW:0] nb;

  assign nb = bank ? n_tp : n_in;

  // address generation
  always_comb begin
    min_abank = (st == PAIR) ? 1'b0 : bank;
    min_aaddr = i[AW-1:0];
    min_bbank = (st == PAIR) ? 1'b1 : bank;
    min_baddr = j[AW-1:0];
    seg_abank = 1'b0;  seg_aaddr = i[AW-1:0];
    seg_bbank = 1'b1;  seg_baddr = j[AW-1:0];
  end

  logic [31:0] d2;
  logic [9:0]  cost;
  always_comb begin
    int dx, dy;
    logic [7:0] dl;
    dx = int'(min_adata.x) - int'(min_bdata.x);
    dy = int'(min_adata.y) - int'(min_bdata.y);
    d2 = 32'(dx * dx + dy * dy);
    dl = (seg_adata.len > seg_bdata.len) ? seg_adata.len - seg_bdata.len
                                         : seg_bdata.len - seg_adata.len;
    cost = {2'b0, dl} + {2'b0, bio_pkg::ang_dist(seg_adata.ang, seg_bdata.ang)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; bank <= 1'b0; i <= '0; j <= '0; best_d2 <= '1; best_ang <= '0;
      best_cost <= '1; done <= 1'b0; found <= 1'b0; ref_in <= '0; ref_tp <= '0;
      seg_we <= 1'b0; seg_wbank <= 1'b0; seg_waddr <= '0; seg_wdata <= '0;
    end else begin
      seg_we <= 1'b0;
      done   <= 1'b0;
      case (st)
        IDLE: if (start) begin
          st <= SEG; bank <= 1'b0; i <= '0; j <= '0; best_d2 <= '1; found <= 1'b0;
          best_cost <= '1;
        end
        SEG: begin
          if (i >= nb) begin
            if (bank == 1'b0) begin bank <= 1'b1; i <= '0; j <= '0; best_d2 <= '1; end
            else begin st <= PAIR; i <= '0; j <= '0; end
          end else if (j >= nb) begin
            logic [15:0] l;
            l = bio_pkg::isqrt32(best_d2);
            seg_we    <= 1'b1;
            seg_wbank <= bank;
            seg_waddr <= i[AW-1:0];
            seg_wdata.len <= (best_d2 == '1 || l > 255) ? 8'd255 : l[7:0];
            seg_wdata.ang <= (best_d2 == '1) ? 8'd0 : best_ang - min_adata.ang;
            i <= i + 1'b1; j <= '0; best_d2 <= '1;
          end else begin
            if (j != i && d2 < best_d2) begin best_d2 <= d2; best_ang <= min_bdata.ang; end
            j <= j + 1'b1;
          end
        end
        PAIR: begin
          if (i >= n_in) begin
            st <= IDLE; done <= 1'b1;
          end else if (j >= n_tp) begin
            i <= i + 1'b1; j <= '0;
          end else begin
            if (min_adata.typ == min_bdata.typ && cost < best_cost) begin
              best_cost <= cost; ref_in <= i[AW-1:0]; ref_tp <= j[AW-1:0]; found <= 1'b1;
            end
            j <= j + 1'b1;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
