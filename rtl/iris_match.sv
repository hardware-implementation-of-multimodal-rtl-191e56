// iris_match: Hamming-distance comparison of a test iris code with a stored template.
// The test code streams in word by word; the template word with the same number is read
// from the database in the same cycle. Where both words lie inside the iris (mask bits
// set) the six code bits are compared and the differing bits counted. At the last word the
// Hamming distance HD = differing / compared is formed, and the similarity score
// 255 * (1 - HD) leaves with done (score 0 if nothing was comparable). HD as the iris
// matching score is the paper's (its equation 9); restricting it to bits inside both
// irises and turning it into a similarity for the sum-rule fusion are this design's
// choices.
module iris_match #(
  parameter int unsigned M  = 360 * 32,
  parameter int unsigned WW = 7
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [$clog2(M)-1:0] in_addr,
  input  logic [WW-1:0] in_word,
  input  logic          in_last,
  output logic [$clog2(M)-1:0] t_addr,
  input  logic [WW-1:0] t_word,
  output logic          done,
  output logic [7:0]    score,
  output logic [31:0]   n_diff,
  output logic [31:0]   n_cmp
);
  logic [31:0] diff, cmp;
  assign t_addr = in_addr;

  logic [31:0] d_now, c_now;
  always_comb begin
    logic [WW-2:0] x;
    x = in_word[WW-2:0] ^ t_word[WW-2:0];
    d_now = '0; c_now = '0;
    if (in_word[WW-1] && t_word[WW-1]) begin
      for (int i = 0; i < int'(WW) - 1; i++) d_now += 32'(x[i]);
      c_now = WW - 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      diff <= '0; cmp <= '0; done <= 1'b0; score <= '0; n_diff <= '0; n_cmp <= '0;
    end else begin
      done <= 1'b0;
      if (in_valid) begin
        if (in_last) begin
          logic [31:0] d, c, s;
          d = diff + d_now; c = cmp + c_now;
          s = (c == 0) ? 32'd0 : 32'd255 - (d * 32'd255 + c / 2) / c;
          score <= s[7:0]; n_diff <= d; n_cmp <= c; done <= 1'b1;
          diff <= '0; cmp <= '0;
        end else begin
          diff <= diff + d_now; cmp <= cmp + c_now;
        end
      end
    end
  end
endmodule
