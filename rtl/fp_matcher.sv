// fp_matcher: the fingerprint alignment and matching engine. It connects memory M1, the
// alignment block, the polar-conversion block with its CORDIC, memory M2 and the matching
// block in the order the paper draws them, and runs them one after another on start:
// align (best pair), polar (both sets into M2), match (score). The input print's minutiae
// are written into M1 bank 0 and the template's into bank 1 through the write port before
// start; n_in and n_tp give their counts. done pulses with score (8-bit match ratio,
// 255 = all minutiae paired) and matched. If no pair of equal type exists the score is 0.
module fp_matcher #(
  parameter int unsigned NMAX = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              min_we,
  input  logic              min_wbank,
  input  logic [$clog2(NMAX)-1:0] min_waddr,
  input  bio_pkg::minutia_t min_wdata,
  input  logic [$clog2(NMAX):0] n_in,
  input  logic [$clog2(NMAX):0] n_tp,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [7:0]        score,
  output logic [$clog2(NMAX):0] matched,
  output logic              pair_found
);
  localparam int unsigned AW = $clog2(NMAX);
  typedef enum logic [1:0] {IDLE, ALIGN, POLAR, MATCH} state_t;
  state_t st;

  logic al_start, al_done, al_found, po_start, po_done, ma_start, ma_done;
  logic [AW-1:0] ref_in, ref_tp;
  logic [7:0] ma_score;

  // M1 ports, muxed between the alignment and polar blocks
  logic al_abank, al_bbank, po_abank, po_bbank;
  logic [AW-1:0] al_aaddr, al_baddr, po_aaddr, po_baddr;
  bio_pkg::minutia_t m1_a, m1_b;
  logic seg_we, seg_wbank, seg_abank, seg_bbank;
  logic [AW-1:0] seg_waddr, seg_aaddr, seg_baddr;
  bio_pkg::segment_t seg_wdata, seg_a, seg_b;

  fp_m1 #(.NMAX(NMAX)) u_m1 (
    .clk, .min_we, .min_wbank, .min_waddr, .min_wdata,
    .min_abank(st == POLAR ? po_abank : al_abank), .min_aaddr(st == POLAR ? po_aaddr : al_aaddr),
    .min_adata(m1_a),
    .min_bbank(st == POLAR ? po_bbank : al_bbank), .min_baddr(st == POLAR ? po_baddr : al_baddr),
    .min_bdata(m1_b),
    .seg_we, .seg_wbank, .seg_waddr, .seg_wdata,
    .seg_abank, .seg_aaddr, .seg_adata(seg_a), .seg_bbank, .seg_baddr, .seg_bdata(seg_b));

  fp_align #(.NMAX(NMAX)) u_align (
    .clk, .rst_n, .start(al_start), .n_in, .n_tp,
    .min_abank(al_abank), .min_aaddr(al_aaddr), .min_adata(m1_a),
    .min_bbank(al_bbank), .min_baddr(al_baddr), .min_bdata(m1_b),
    .seg_we, .seg_wbank, .seg_waddr, .seg_wdata,
    .seg_abank, .seg_aaddr, .seg_adata(seg_a), .seg_bbank, .seg_baddr, .seg_bdata(seg_b),
    .done(al_done), .found(al_found), .ref_in, .ref_tp);

  logic cor_iv, cor_ov;
  logic signed [23:0] cor_x, cor_y;
  logic [23:0] cor_mag;
  logic [7:0]  cor_ang;
  cordic #(.IW(24), .ITER(14)) u_cordic (
    .clk, .rst_n, .in_valid(cor_iv), .in_x(cor_x), .in_y(cor_y),
    .out_valid(cor_ov), .out_mag(cor_mag), .out_ang(cor_ang));

  logic m2_we, m2_wbank;
  logic [AW-1:0] m2_waddr;
  bio_pkg::polar_t m2_wdata, m2_a, m2_b;
  fp_polar #(.NMAX(NMAX)) u_polar (
    .clk, .rst_n, .start(po_start), .n_in, .n_tp, .ref_in, .ref_tp,
    .min_abank(po_abank), .min_aaddr(po_aaddr), .min_adata(m1_a),
    .min_bbank(po_bbank), .min_baddr(po_baddr), .min_bdata(m1_b),
    .cor_valid(cor_iv), .cor_x, .cor_y, .cor_out_valid(cor_ov), .cor_mag, .cor_ang,
    .m2_we, .m2_wbank, .m2_waddr, .m2_wdata, .done(po_done));

  logic ma_abank, ma_bbank;
  logic [AW-1:0] ma_aaddr, ma_baddr;
  fp_m2 #(.NMAX(NMAX)) u_m2 (
    .clk, .we(m2_we), .wbank(m2_wbank), .waddr(m2_waddr), .wdata(m2_wdata),
    .abank(ma_abank), .aaddr(ma_aaddr), .adata(m2_a),
    .bbank(ma_bbank), .baddr(ma_baddr), .bdata(m2_b));

  fp_match #(.NMAX(NMAX)) u_match (
    .clk, .rst_n, .start(ma_start), .n_in, .n_tp,
    .abank(ma_abank), .aaddr(ma_aaddr), .adata(m2_a),
    .bbank(ma_bbank), .baddr(ma_baddr), .bdata(m2_b),
    .done(ma_done), .matched, .score(ma_score));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; al_start <= 1'b0; po_start <= 1'b0; ma_start <= 1'b0;
      done <= 1'b0; score <= '0; pair_found <= 1'b0;
    end else begin
      al_start <= 1'b0; po_start <= 1'b0; ma_start <= 1'b0; done <= 1'b0;
      case (st)
        IDLE:  if (start) begin st <= ALIGN; al_start <= 1'b1; end
        ALIGN: if (al_done) begin
          pair_found <= al_found;
          if (al_found) begin st <= POLAR; po_start <= 1'b1; end
          else begin st <= IDLE; score <= '0; done <= 1'b1; end
        end
        POLAR: if (po_done) begin st <= MATCH; ma_start <= 1'b1; end
        MATCH: if (ma_done) begin st <= IDLE; score <= ma_score; done <= 1'b1; end
        default: st <= IDLE;
      endcase
    end
  end
  assign busy = (st != IDLE);
endmodule
