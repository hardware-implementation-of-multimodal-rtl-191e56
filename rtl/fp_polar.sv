// fp_polar: converts every minutia of both sets into polar form about its set's
// reference minutia (the best pair found by fp_align), which aligns the two sets. For
// minutia k with reference m: (dx, dy) = (x_k - x_m, y_k - y_m) is sent to the CORDIC,
// whose modulus gives r (shifted right by RSH and saturated to 8 bits) and whose angle
// minus the reference angle gives theta (the difference vector is scaled by 256 on the
// way in to keep the CORDIC's precision); o = angle_k - angle_m. The record goes to M2.
// One minutia is in flight at a time (the CORDIC latency per minutia). The triplet
// (r, theta, o) follows the paper; the scaling of r is this design's choice, so that 8 bits
// cover 4 * 255 pixels.
module fp_polar #(
  parameter int unsigned NMAX = 64,
  parameter int unsigned RSH  = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [$clog2(NMAX):0] n_in,
  input  logic [$clog2(NMAX):0] n_tp,
  input  logic [$clog2(NMAX)-1:0] ref_in,
  input  logic [$clog2(NMAX)-1:0] ref_tp,
  output logic              min_abank,
  output logic [$clog2(NMAX)-1:0] min_aaddr,
  input  bio_pkg::minutia_t min_adata,
  output logic              min_bbank,
  output logic [$clog2(NMAX)-1:0] min_baddr,
  input  bio_pkg::minutia_t min_bdata,
  output logic              cor_valid,
  output logic signed [23:0] cor_x,
  output logic signed [23:0] cor_y,
  input  logic              cor_out_valid,
  input  logic [23:0]       cor_mag,
  input  logic [7:0]        cor_ang,
  output logic              m2_we,
  output logic              m2_wbank,
  output logic [$clog2(NMAX)-1:0] m2_waddr,
  output bio_pkg::polar_t   m2_wdata,
  output logic              done
);
  localparam int unsigned AW = $clog2(NMAX);
  typedef enum logic [1:0] {IDLE, ISSUE, WAIT} state_t;
  state_t st;
  logic        bank;
  logic [AW:0] k;

  assign min_abank = bank;
  assign min_aaddr = k[AW-1:0];
  assign min_bbank = bank;
  assign min_baddr = bank ? ref_tp : ref_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; bank <= 1'b0; k <= '0; done <= 1'b0; cor_valid <= 1'b0;
      cor_x <= '0; cor_y <= '0; m2_we <= 1'b0; m2_wbank <= 1'b0; m2_waddr <= '0; m2_wdata <= '0;
    end else begin
      done <= 1'b0; cor_valid <= 1'b0; m2_we <= 1'b0;
      case (st)
        IDLE: if (start) begin st <= ISSUE; bank <= 1'b0; k <= '0; end
        ISSUE: begin
          if (k >= (bank ? n_tp : n_in)) begin
            if (bank == 1'b0) begin bank <= 1'b1; k <= '0; end
            else begin st <= IDLE; done <= 1'b1; end
          end else begin
            cor_valid <= 1'b1;
            cor_x <= 24'(signed'({1'b0, min_adata.x}) - signed'({1'b0, min_bdata.x})) <<< 8;
            cor_y <= 24'(signed'({1'b0, min_adata.y}) - signed'({1'b0, min_bdata.y})) <<< 8;
            st <= WAIT;
          end
        end
        WAIT: if (cor_out_valid) begin
          logic [23:0] r;
          r = cor_mag >> (RSH + 8);
          m2_we    <= 1'b1;
          m2_wbank <= bank;
          m2_waddr <= k[AW-1:0];
          m2_wdata.r   <= (r > 255) ? 8'd255 : r[7:0];
          m2_wdata.t   <= cor_ang - min_bdata.ang;
          m2_wdata.o   <= min_adata.ang - min_bdata.ang;
          m2_wdata.typ <= min_adata.typ;
          k  <= k + 1'b1;
          st <= ISSUE;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
