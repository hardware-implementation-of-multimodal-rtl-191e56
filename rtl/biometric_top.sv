// biometric_top: multimodal (fingerprint + iris) biometric recogniser.
// Two independent streaming pipelines run side by side and meet only at the fusion stage.
//
// Fingerprint: normalisation -> orientation estimation, with the image delay FIFO keeping
// the pixels in step -> orientation-guided Gaussian enhancement -> binarisation and
// thinning -> crossing-number minutiae. In test mode the minutiae go to bank 0 of the
// matcher's memory M1 and, when the frame is complete, the matcher (pre-alignment,
// CORDIC polar conversion, elastic matching) compares them with the template in bank 1
// and returns a score. In enrolment mode (mode_train = 1) the minutiae become the
// template instead. A template can also be loaded through the fp_tpl_* port.
//
// Iris: the eye image is written into the frame buffer while pre-processing (Gaussian
// mean subtraction, sign threshold), morphological opening and connected-component
// analysis find the pupil. The normaliser then unwraps the ring around the pupil from the
// buffer into a 32 x 360 image, the limbic boundary is located, the image is enhanced by
// local normalisation and sliced into the 6-bit-per-pixel iris code. In enrolment mode
// three codes (train_sample 0, 1, 2) give a majority template written to the database
// under person; in test mode the code is compared by Hamming distance with the template
// of person.
//
// Fusion combines the two scores by the weighted sum rule and decides. Frames are fed one
// pixel per in_valid in raster order; a new frame must wait until the previous one has
// left the pipeline (fp_busy / ir_busy low). Fingerprint template loads and frames must
// not overlap. All sizes are parameters; their defaults are 296 x 560 fingerprints
// (FVC2002 DB2) and 320 x 240 eye images (MMU v1).
// Lint note: some status outputs of the sub-blocks (window positions, label counts,
// Hamming-distance counts, FIFO level) are observed only in simulation and are left
// unconnected or unused here; the unused-signal warnings for them stand.
module biometric_top #(
  parameter int unsigned FP_W = 296,
  parameter int unsigned FP_H = 560,
  parameter int unsigned IR_W = 320,
  parameter int unsigned IR_H = 240,
  parameter int unsigned NA   = 360,
  parameter int unsigned NR   = 32,
  parameter int unsigned NMAX = 64,
  parameter int unsigned NP   = 5,
  parameter int unsigned FP_DELAY = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  // operating mode
  input  logic              mode_train,
  input  logic [1:0]        train_sample,
  input  logic [$clog2(NP)-1:0] person,
  // fingerprint stream and template load
  input  logic              fp_valid,
  input  bio_pkg::pix_t     fp_pix,
  input  logic              fp_tpl_we,
  input  logic [$clog2(NMAX)-1:0] fp_tpl_addr,
  input  bio_pkg::minutia_t fp_tpl_data,
  input  logic              fp_tpl_set_n,
  input  logic [$clog2(NMAX):0] fp_tpl_n,
  // iris stream
  input  logic              ir_valid,
  input  bio_pkg::pix_t     ir_pix,
  // fingerprint results
  output logic              fp_min_valid,
  output bio_pkg::minutia_t fp_min,
  output logic              fp_frame_done,
  output logic [$clog2(NMAX):0] fp_n_minutiae,
  output logic [$clog2(NMAX):0] fp_n_template,
  output logic              fp_score_valid,
  output logic [7:0]        fp_score,
  output logic              fp_busy,
  output logic              fp_delay_overflow,
  // iris results
  output logic              pupil_done,
  output logic              pupil_found,
  output logic [9:0]        pupil_cx,
  output logic [9:0]        pupil_cy,
  output logic [9:0]        pupil_r,
  output logic [7:0]        limbic_row,
  output logic              ir_code_valid,
  output logic              enrol_done,
  output logic [NP-1:0]     enrolled,
  output logic              ir_score_valid,
  output logic [7:0]        ir_score,
  output logic              ir_busy,
  // decision
  output logic              decision_valid,
  output logic              accept,
  output logic [7:0]        fused_score
);
  localparam int unsigned M  = NA * NR;
  localparam int unsigned MW = $clog2(M);
  localparam int unsigned AW = $clog2(NMAX);

  // ---------------- fingerprint feature extraction ----------------
  logic n_v;  bio_pkg::pix_t n_pix;
  fp_normalise #(.W(FP_W), .H(FP_H)) u_fp_norm (
    .clk, .rst_n, .in_valid(fp_valid), .in_pix(fp_pix), .out_valid(n_v), .out_pix(n_pix));

  logic o_v;  logic [6:0] o_theta;
  fp_orientation #(.W(FP_W), .H(FP_H)) u_fp_orient (
    .clk, .rst_n, .in_valid(n_v), .in_pix(n_pix), .out_valid(o_v), .out_theta(o_theta));

  bio_pkg::pix_t d_pix;
  logic [$clog2(FP_DELAY):0] d_level;
  logic d_ovf, d_udf;
  fp_image_delay #(.DEPTH(FP_DELAY)) u_fp_delay (
    .clk, .rst_n, .in_valid(n_v), .in_pix(n_pix), .pop(o_v), .out_pix(d_pix),
    .level(d_level), .overflow(d_ovf), .underflow(d_udf));
  assign fp_delay_overflow = d_ovf | d_udf;

  logic g_v, g_hw;  bio_pkg::pix_t g_pix;  logic [6:0] g_theta;
  fp_guided_gauss #(.W(FP_W), .H(FP_H)) u_fp_gauss (
    .clk, .rst_n, .in_valid(o_v), .in_pix(d_pix), .in_theta(o_theta),
    .out_valid(g_v), .out_pix(g_pix), .out_theta(g_theta), .out_hwind(g_hw));

  logic t_v, t_bit;  logic [6:0] t_theta;  logic [31:0] t_del;
  fp_binarise_thin #(.W(FP_W), .H(FP_H)) u_fp_thin (
    .clk, .rst_n, .in_valid(g_v), .in_pix(g_pix), .in_side(g_theta),
    .out_valid(t_v), .out_bit(t_bit), .out_side(t_theta), .deleted(t_del));

  logic [31:0] n_end, n_bif, n_rej;
  fp_minutiae #(.W(FP_W), .H(FP_H)) u_fp_min (
    .clk, .rst_n, .in_valid(t_v), .in_bit(t_bit), .in_theta(t_theta),
    .out_valid(fp_min_valid), .out_min(fp_min), .frame_done(fp_frame_done),
    .n_end, .n_bif, .n_rejected(n_rej));

  // ---------------- fingerprint matching ----------------
  logic [AW:0] cnt;          // minutiae of the current frame
  logic        mt_start, mt_busy, mt_done, mt_pair;
  logic [AW:0] mt_matched;
  logic [7:0]  mt_score;
  logic        train_frame;  // mode latched for the frame in flight
  logic        m_we, m_bank;
  logic [AW-1:0] m_addr;
  bio_pkg::minutia_t m_data;

  always_comb begin
    if (fp_min_valid && cnt < (AW+1)'(NMAX)) begin
      m_we = 1'b1; m_bank = mode_train; m_addr = cnt[AW-1:0]; m_data = fp_min;
    end else begin
      m_we = fp_tpl_we; m_bank = 1'b1; m_addr = fp_tpl_addr; m_data = fp_tpl_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; fp_n_minutiae <= '0; fp_n_template <= '0; mt_start <= 1'b0; train_frame <= 1'b0;
    end else begin
      mt_start <= 1'b0;
      if (fp_valid) train_frame <= mode_train;
      if (fp_tpl_set_n) fp_n_template <= fp_tpl_n;
      if (fp_min_valid && cnt < (AW+1)'(NMAX)) cnt <= cnt + 1'b1;
      if (fp_frame_done) begin
        fp_n_minutiae <= cnt;
        cnt <= '0;
        if (train_frame) fp_n_template <= cnt;
        else mt_start <= 1'b1;
      end
    end
  end

  fp_matcher #(.NMAX(NMAX)) u_fp_match (
    .clk, .rst_n, .min_we(m_we), .min_wbank(m_bank), .min_waddr(m_addr), .min_wdata(m_data),
    .n_in(fp_n_minutiae), .n_tp(fp_n_template), .start(mt_start),
    .busy(mt_busy), .done(mt_done), .score(mt_score), .matched(mt_matched), .pair_found(mt_pair));
  assign fp_score_valid = mt_done;
  assign fp_score       = mt_score;

  // fingerprint busy from first pixel to minutiae frame end and matcher done
  logic fp_in_frame;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fp_in_frame <= 1'b0;
    else if (fp_valid) fp_in_frame <= 1'b1;
    else if (fp_frame_done) fp_in_frame <= 1'b0;
  end
  assign fp_busy = fp_in_frame | mt_start | mt_busy;

  // ---------------- iris feature extraction ----------------
  logic fb_done;  logic [9:0] fb_rx, fb_ry;  bio_pkg::pix_t fb_rdata;
  iris_frame_buffer #(.W(IR_W), .H(IR_H)) u_ir_buf (
    .clk, .rst_n, .in_valid(ir_valid), .in_pix(ir_pix), .frame_done(fb_done),
    .rx(fb_rx), .ry(fb_ry), .rdata(fb_rdata));

  logic pp_v, pp_bit;
  iris_preproc #(.W(IR_W), .H(IR_H)) u_ir_pre (
    .clk, .rst_n, .in_valid(ir_valid), .in_pix(ir_pix), .out_valid(pp_v), .out_bit(pp_bit));

  logic mo_v, mo_bit;
  iris_morph #(.W(IR_W), .H(IR_H)) u_ir_morph (
    .clk, .rst_n, .in_valid(pp_v), .in_bit(pp_bit), .out_valid(mo_v), .out_bit(mo_bit));

  logic pu_ovf;  logic [7:0] pu_nreg;
  iris_pupil #(.W(IR_W), .H(IR_H), .NL(128)) u_ir_pupil (
    .clk, .rst_n, .in_valid(mo_v), .in_bit(mo_bit), .done(pupil_done), .found(pupil_found),
    .cx(pupil_cx), .cy(pupil_cy), .radius(pupil_r), .overflow(pu_ovf), .n_regions(pu_nreg));

  logic no_v, no_done, no_busy;  bio_pkg::pix_t no_pix;
  iris_normalise #(.W(IR_W), .H(IR_H), .NA(NA), .NR(NR)) u_ir_norm (
    .clk, .rst_n, .start(pupil_done && pupil_found), .cx(pupil_cx), .cy(pupil_cy), .rp(pupil_r),
    .rx(fb_rx), .ry(fb_ry), .rdata(fb_rdata),
    .out_valid(no_v), .out_pix(no_pix), .done(no_done), .busy(no_busy));

  logic li_v, li_done;  bio_pkg::pix_t li_pix;  logic [15:0] li_row;
  iris_limbic #(.NA(NA), .NR(NR)) u_ir_limbic (
    .clk, .rst_n, .in_valid(no_v), .in_pix(no_pix),
    .out_valid(li_v), .out_pix(li_pix), .out_row(li_row), .limbic(limbic_row), .done(li_done));

  logic en_v;  bio_pkg::pix_t en_pix;  logic [15:0] en_row;
  iris_enhance #(.W(NA), .H(NR)) u_ir_enh (
    .clk, .rst_n, .in_valid(li_v), .in_pix(li_pix), .in_tag(li_row),
    .out_valid(en_v), .out_pix(en_pix), .out_tag(en_row));

  logic cd_v, cd_last;  logic [MW-1:0] cd_addr;  logic [6:0] cd_word;
  iris_code #(.M(M)) u_ir_code (
    .clk, .rst_n, .in_valid(en_v), .in_pix(en_pix), .in_row(en_row), .limbic(limbic_row),
    .out_valid(cd_v), .out_addr(cd_addr), .out_word(cd_word), .out_last(cd_last));
  assign ir_code_valid = cd_v;

  // ---------------- iris enrolment and matching ----------------
  logic ir_train;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ir_train <= 1'b0;
    else if (ir_valid) ir_train <= mode_train;
  end

  logic tp_v;  logic [MW-1:0] tp_addr;  logic [6:0] tp_word;
  iris_template #(.M(M), .WW(7)) u_ir_tpl (
    .clk, .rst_n, .in_valid(cd_v && ir_train), .in_sample(train_sample),
    .in_addr(cd_addr), .in_word(cd_word),
    .out_valid(tp_v), .out_addr(tp_addr), .out_word(tp_word));

  logic [MW-1:0] db_raddr;  logic [6:0] db_rdata;
  iris_db #(.NP(NP), .M(M), .WW(7)) u_ir_db (
    .clk, .rst_n, .we(tp_v), .wperson(person), .waddr(tp_addr), .wdata(tp_word),
    .rperson(person), .raddr(db_raddr), .rdata(db_rdata), .valid(enrolled));
  assign enrol_done = tp_v && (tp_addr == MW'(M - 1));

  logic hm_done;  logic [7:0] hm_score;  logic [31:0] hm_diff, hm_cmp;
  iris_match #(.M(M), .WW(7)) u_ir_match (
    .clk, .rst_n, .in_valid(cd_v && !ir_train), .in_addr(cd_addr), .in_word(cd_word),
    .in_last(cd_last), .t_addr(db_raddr), .t_word(db_rdata),
    .done(hm_done), .score(hm_score), .n_diff(hm_diff), .n_cmp(hm_cmp));

  // A test frame without a pupil gives iris score 0 at once.
  logic no_pupil;
  assign no_pupil = pupil_done && !pupil_found && !ir_train;
  assign ir_score_valid = hm_done || no_pupil;
  assign ir_score       = hm_done ? hm_score : 8'd0;

  logic ir_in_frame;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ir_in_frame <= 1'b0;
    else if (ir_valid) ir_in_frame <= 1'b1;
    else if ((pupil_done && !pupil_found) || (cd_v && cd_last)) ir_in_frame <= 1'b0;
  end
  assign ir_busy = ir_in_frame;

  // ---------------- fusion and decision ----------------
  fusion u_fusion (
    .clk, .rst_n, .fp_valid(fp_score_valid), .fp_score, .ir_valid(ir_score_valid), .ir_score,
    .decision_valid, .accept, .fused(fused_score));
endmodule
