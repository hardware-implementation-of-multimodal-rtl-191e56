// iris_template: enrolment template by majority-bit selection. A person is enrolled from
// three images of the same eye. The codes of samples 0 and 1 are stored as they stream
// in; while sample 2 streams, every bit of the template is the majority of the three
// corresponding bits (ab | bc | ca), and the result leaves as a word stream (out_valid,
// out_addr, out_word) ready to be written into the database. The method is the paper's;
// the on-chip storage of the first two codes is this design's choice. One word per cycle.
module iris_template #(
  parameter int unsigned M  = 360 * 32,
  parameter int unsigned WW = 7
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [1:0]    in_sample,
  input  logic [$clog2(M)-1:0] in_addr,
  input  logic [WW-1:0] in_word,
  output logic          out_valid,
  output logic [$clog2(M)-1:0] out_addr,
  output logic [WW-1:0] out_word
);
  logic [WW-1:0] s0 [M];
  logic [WW-1:0] s1 [M];
  always_ff @(posedge clk) begin
    if (in_valid && in_sample == 2'd0) s0[in_addr] <= in_word;
    if (in_valid && in_sample == 2'd1) s1[in_addr] <= in_word;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_addr <= '0; out_word <= '0;
    end else begin
      logic [WW-1:0] a, b;
      a = s0[in_addr]; b = s1[in_addr];
      out_valid <= in_valid && (in_sample == 2'd2);
      out_addr  <= in_addr;
      out_word  <= (a & b) | (b & in_word) | (in_word & a);
    end
  end
endmodule
