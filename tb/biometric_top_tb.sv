// biometric_top_tb: end-to-end test of the recogniser at reduced image sizes (96 x 96
// fingerprints, 80 x 60 eye images, a 90 x 8 unwrapped iris). Synthetic inputs: the
// fingerprints are ridge patterns (period 9) broken along fault lines so that ridge endings
// and bifurcations appear; the eye images have a dark bowl-shaped pupil, a textured iris and
// a bright sclera, and one has no pupil. Sequence: enrol fingerprint A and three samples of
// eye E1 for person 2; then test (A, E1) which must be accepted, (B, E2) which must be
// rejected, and (A, no pupil) which must be rejected with iris score 0. Every mechanism
// along the way is counted and a count of zero is a failure.
module biometric_top_tb;
  localparam int FW = 96, FH = 96, IW = 80, IH = 60;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic mode_train, fp_valid, ir_valid, fp_tpl_we, fp_tpl_set_n;
  logic [1:0] train_sample; logic [2:0] person;
  logic [7:0] fp_pix, ir_pix;
  bio_pkg::minutia_t fp_min;
  logic fp_min_valid, fp_frame_done, fp_score_valid, fp_busy, fp_delay_overflow;
  logic [6:0] fp_n_minutiae, fp_n_template;
  logic [7:0] fp_score, limbic_row, ir_score, fused_score;
  logic pupil_done, pupil_found, ir_code_valid, enrol_done, ir_score_valid, ir_busy, decision_valid, accept;
  logic [9:0] pupil_cx, pupil_cy, pupil_r;
  logic [4:0] enrolled;

  biometric_top #(.FP_W(FW), .FP_H(FH), .IR_W(IW), .IR_H(IH), .NA(90), .NR(8), .FP_DELAY(4096)) dut (
    .clk, .rst_n, .mode_train, .train_sample, .person, .fp_valid, .fp_pix,
    .fp_tpl_we, .fp_tpl_addr(6'd0), .fp_tpl_data('0), .fp_tpl_set_n, .fp_tpl_n(7'd0),
    .ir_valid, .ir_pix, .fp_min_valid, .fp_min, .fp_frame_done, .fp_n_minutiae, .fp_n_template,
    .fp_score_valid, .fp_score, .fp_busy, .fp_delay_overflow, .pupil_done, .pupil_found,
    .pupil_cx, .pupil_cy, .pupil_r, .limbic_row, .ir_code_valid, .enrol_done, .enrolled,
    .ir_score_valid, .ir_score, .ir_busy, .decision_valid, .accept, .fused_score);

  // mechanism counters
  int c_min, c_end, c_bif, c_fpscore, c_pair, c_hw, c_vw, c_pfound, c_pmiss, c_code, c_enrol;
  int c_irscore, c_acc, c_rej, c_ovf, c_dec;
  int last_fp, last_ir, last_fused; bit last_acc;
  always @(posedge clk) if (rst_n) begin
    if (fp_min_valid) begin c_min++; if (fp_min.typ) c_bif++; else c_end++; end
    if (fp_score_valid) begin c_fpscore++; last_fp = fp_score; if (dut.mt_pair) c_pair++; end
    if (dut.g_v) begin if (dut.g_hw) c_hw++; else c_vw++; end
    if (pupil_done) begin if (pupil_found) c_pfound++; else c_pmiss++; end
    if (ir_code_valid) c_code++;
    if (enrol_done) c_enrol++;
    if (ir_score_valid) begin c_irscore++; last_ir = ir_score; end
    if (fp_delay_overflow) c_ovf++;
    if (decision_valid) begin c_dec++; last_fused = fused_score; last_acc = accept; if (accept) c_acc++; else c_rej++; end
  end

  // fingerprint patterns: 0 = A, 1 = B
  function automatic int fp_img(int p, int x, int y);
    real ph;
    if (p == 0) begin
      ph = x + ((y > 48 && x > 30 && x < 70) ? 4.5 : 0.0) + ((x > 60 && y < 30) ? 4.5 : 0.0);
    end else begin
      ph = 0.6 * x + 0.8 * y + ((x + y > 100 && x < 50) ? 4.5 : 0.0);
    end
    return int'(128.0 + 90.0 * $cos(2.0 * 3.14159265 * ph / 9.0));
  endfunction
  // eye images: 0 = E1, 1 = E2, 2 = no pupil
  function automatic int eye_img(int e, int x, int y);
    real dx, dy, r, a;
    dx = x - 40; dy = y - 30; r = $sqrt(dx * dx + dy * dy); a = $atan2(dy, dx);
    if (r < 12.0 && e != 2) return int'(10.0 + 0.5 * r * r);
    if (r < 26.0) return int'(150.0 + 14.0 * $sin((e == 1 ? 5.0 : 7.0) * a + (e == 1 ? 1.3 : 0.0) + 0.4 * r));
    return 220;
  endfunction

  task automatic send_fp(input int p);
    for (int y = 0; y < FH; y++) for (int x = 0; x < FW; x++) begin
      @(negedge clk); fp_valid = 1; fp_pix = 8'(fp_img(p, x, y));
    end
    @(negedge clk); fp_valid = 0;
  endtask
  task automatic send_eye(input int e);
    for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++) begin
      @(negedge clk); ir_valid = 1; ir_pix = 8'(eye_img(e, x, y));
    end
    @(negedge clk); ir_valid = 0;
  endtask
  task automatic wait_idle();
    repeat (5) @(negedge clk);
    while (fp_busy || ir_busy) @(negedge clk);
    repeat (5) @(negedge clk);
  endtask
  task automatic test(input int p, input int e, input bit exp_acc, input string what);
    int d0;
    d0 = c_dec;
    fork send_fp(p); send_eye(e); join
    wait_idle();
    check(c_dec == d0 + 1, {what, ": one decision"});
    check(last_acc == exp_acc, $sformatf("%s: accept=%0d fp=%0d ir=%0d fused=%0d", what, last_acc, last_fp, last_ir, last_fused));
    $display("%s: fp score %0d, iris score %0d, fused %0d, accept %0d", what, last_fp, last_ir, last_fused, last_acc);
  endtask

  initial begin
    mode_train = 1; train_sample = 0; person = 3'd2; fp_valid = 0; ir_valid = 0; fp_pix = 0; ir_pix = 0;
    fp_tpl_we = 0; fp_tpl_set_n = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // enrolment
    fork
      send_fp(0);
      for (int s = 0; s < 3; s++) begin
        train_sample = 2'(s);
        send_eye(0);
        repeat (5) @(negedge clk);
        while (ir_busy) @(negedge clk);
      end
    join
    wait_idle();
    check(int'(fp_n_template) > 0, $sformatf("template minutiae %0d", fp_n_template));
    check(enrolled == 5'b00100, $sformatf("enrolled %b", enrolled));
    check(c_enrol == 1, "one enrolment");
    check(c_dec == 0 && c_fpscore == 0 && c_irscore == 0, "no scores during enrolment");
    check(pupil_cx >= 39 && pupil_cx <= 41 && pupil_cy >= 29 && pupil_cy <= 31, $sformatf("pupil at %0d,%0d", pupil_cx, pupil_cy));
    $display("template minutiae %0d, pupil r %0d, limbic row %0d", fp_n_template, pupil_r, limbic_row);
    // verification
    mode_train = 0;
    test(0, 0, 1'b1, "genuine");
    check(last_fp > 200 && last_ir > 200, "genuine scores high");
    test(1, 1, 1'b0, "impostor");
    test(0, 2, 1'b0, "no pupil");
    check(last_ir == 0, "iris score 0 without pupil");
    // mechanism counts
    check(c_min > 0, $sformatf("minutiae %0d", c_min));
    check(c_end > 0, $sformatf("ridge endings %0d", c_end));
    check(c_bif > 0, $sformatf("bifurcations %0d", c_bif));
    check(c_fpscore == 3, "fingerprint scores");
    check(c_pair > 0, "alignment pair found");
    check(c_hw > 0 && c_vw > 0, $sformatf("hwind %0d vwind %0d", c_hw, c_vw));
    check(dut.t_del > 0, "thinning deleted pixels");
    check(c_pfound == 5 && c_pmiss == 1, $sformatf("pupil found %0d missed %0d", c_pfound, c_pmiss));
    check(c_code == 5 * 90 * 8, $sformatf("code words %0d", c_code));
    check(c_irscore == 3, "iris scores");
    check(c_acc > 0 && c_rej > 0, "accept and reject");
    check(c_ovf == 0, "delay FIFO never over/underflows");
    $display("minutiae %0d (endings %0d, bifurcations %0d), hwind %0d, vwind %0d, deleted %0d",
             c_min, c_end, c_bif, c_hw, c_vw, dut.t_del);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
