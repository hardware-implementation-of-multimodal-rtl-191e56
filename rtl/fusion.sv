// fusion: score-level fusion and decision. Each trait's score (8 bits, 0..255 standing for
// 0..1) is first normalised to the common range by min-max normalisation with the limits
// FP_MIN/FP_MAX and IR_MIN/IR_MAX, then the two are combined by the weighted sum rule,
// 0.4 for the fingerprint and 0.6 for the iris (WFP, WIR out of 256), and the person is
// accepted if the fused score exceeds THRESH. Scores may arrive in either order; the
// decision is made when both have arrived and is presented with decision_valid for one
// cycle. The sum rule, the normalisation to [0, 1] and the weights are the paper's; the
// min-max form, its limits and the threshold are this design's choices.
module fusion #(
  parameter int unsigned FP_MIN = 0,
  parameter int unsigned FP_MAX = 255,
  parameter int unsigned IR_MIN = 0,
  parameter int unsigned IR_MAX = 255,
  parameter int unsigned WFP    = 102,
  parameter int unsigned WIR    = 154,
  parameter int unsigned THRESH = 128
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       fp_valid,
  input  logic [7:0] fp_score,
  input  logic       ir_valid,
  input  logic [7:0] ir_score,
  output logic       decision_valid,
  output logic       accept,
  output logic [7:0] fused
);
  function automatic logic [7:0] mm_norm(input logic [7:0] s, input int unsigned lo,
                                         input int unsigned hi);
    int v;
    if (32'(s) <= lo) return 8'd0;
    if (32'(s) >= hi) return 8'd255;
    v = ((int'(s) - int'(lo)) * 255) / (int'(hi) - int'(lo));
    return 8'(v);
  endfunction

  logic       have_fp, have_ir;
  logic [7:0] nfp, nir;
  logic [7:0] nfp_now, nir_now;
  assign nfp_now = fp_valid ? mm_norm(fp_score, FP_MIN, FP_MAX) : nfp;
  assign nir_now = ir_valid ? mm_norm(ir_score, IR_MIN, IR_MAX) : nir;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_fp <= 1'b0; have_ir <= 1'b0; nfp <= '0; nir <= '0;
      decision_valid <= 1'b0; accept <= 1'b0; fused <= '0;
    end else begin
      decision_valid <= 1'b0;
      if (fp_valid) nfp <= nfp_now;
      if (ir_valid) nir <= nir_now;
      if ((have_fp || fp_valid) && (have_ir || ir_valid)) begin
        logic [15:0] f;
        f = (16'(nfp_now) * 16'(WFP) + 16'(nir_now) * 16'(WIR) + 16'd128) >> 8;
        fused  <= (f > 255) ? 8'd255 : f[7:0];
        accept <= (32'(f) > THRESH);
        decision_valid <= 1'b1;
        have_fp <= 1'b0; have_ir <= 1'b0;
      end else begin
        if (fp_valid) have_fp <= 1'b1;
        if (ir_valid) have_ir <= 1'b1;
      end
    end
  end
endmodule
