// fp_match: compares the aligned input minutiae with the template minutiae in polar form.
// For each input minutia i the template is scanned for the first unused minutia j of the
// same type with |r_i - r_j| <= TOL_R + r_i / 8, a radial-angle distance <= TOL_T and an
// orientation distance <= TOL_O; the radial tolerance grows with the distance from the
// reference, which makes the comparison elastic towards the outside of the print. A
// matched template minutia is marked used. The score is the match ratio
// 2 * matched / (n_in + n_tp), as an 8-bit fraction of 255. One comparison per cycle.
// The elastic comparison and the match ratio follow the paper; the tolerance values and
// the exact form of the elasticity are this design's choices.
module fp_match #(
  parameter int unsigned NMAX  = 64,
  parameter int unsigned TOL_R = 2,
  parameter int unsigned TOL_T = 6,
  parameter int unsigned TOL_O = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [$clog2(NMAX):0] n_in,
  input  logic [$clog2(NMAX):0] n_tp,
  output logic            abank,
  output logic [$clog2(NMAX)-1:0] aaddr,
  input  bio_pkg::polar_t adata,
  output logic            bbank,
  output logic [$clog2(NMAX)-1:0] baddr,
  input  bio_pkg::polar_t bdata,
  output logic            done,
  output logic [$clog2(NMAX):0] matched,
  output logic [7:0]      score
);
  localparam int unsigned AW = $clog2(NMAX);
  typedef enum logic [1:0] {IDLE, SCAN, SCORE} state_t;
  state_t st;
  logic [AW:0] i, j;
  logic [NMAX-1:0] used;

  assign abank = 1'b0; assign aaddr = i[AW-1:0];
  assign bbank = 1'b1; assign baddr = j[AW-1:0];

  logic hit;
  always_comb begin
    logic [7:0] dr;
    dr = (adata.r > bdata.r) ? adata.r - bdata.r : bdata.r - adata.r;
    hit = !used[j[AW-1:0]] && (adata.typ == bdata.typ)
       && (32'(dr) <= TOL_R + 32'(adata.r >> 3))
       && (32'(bio_pkg::ang_dist(adata.t, bdata.t)) <= TOL_T)
       && (32'(bio_pkg::ang_dist(adata.o, bdata.o)) <= TOL_O);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; i <= '0; j <= '0; used <= '0; done <= 1'b0; matched <= '0; score <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        IDLE: if (start) begin st <= SCAN; i <= '0; j <= '0; used <= '0; matched <= '0; end
        SCAN: begin
          if (i >= n_in) st <= SCORE;
          else if (j >= n_tp) begin i <= i + 1'b1; j <= '0; end
          else if (hit) begin
            used[j[AW-1:0]] <= 1'b1; matched <= matched + 1'b1; i <= i + 1'b1; j <= '0;
          end else j <= j + 1'b1;
        end
        SCORE: begin
          logic [31:0] tot, s;
          tot = 32'(n_in) + 32'(n_tp);
          s = (tot == 0) ? 32'd0 : (32'(matched) * 32'd510 + tot / 2) / tot;
          score <= (s > 255) ? 8'd255 : s[7:0];
          done  <= 1'b1;
          st    <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
