// iris_limbic: locates the limbic (iris/sclera) boundary in the unwrapped iris image and
// passes the image on. The NR x NA image arriving from the normaliser is stored and the
// sum of each row is accumulated. The first-order vertical (radial) gradient, summed over
// all angles, is the difference of consecutive row sums; the row k >= KMIN with the
// largest positive difference is taken as the limbic boundary: rows below it belong to
// the iris. The stored image is then replayed at one pixel per cycle together with
// limbic = k, so that later stages can keep only the iris rows. The vertical gradient
// operator is the paper's; summing it over all angles (a boundary concentric with the
// pupil) and KMIN are this design's choices.
module iris_limbic #(
  parameter int unsigned NA   = 360,
  parameter int unsigned NR   = 32,
  parameter int unsigned KMIN = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  bio_pkg::pix_t in_pix,
  output logic          out_valid,
  output bio_pkg::pix_t out_pix,
  output logic [15:0]   out_row,
  output logic [7:0]    limbic,
  output logic          done
);
  localparam int unsigned N  = NA * NR;
  localparam int unsigned AW = $clog2(N);
  typedef enum logic [1:0] {FILL, FIND, PLAY} state_t;
  state_t st;
  bio_pkg::pix_t mem [N];
  logic [31:0] rsum [NR];
  logic [AW-1:0] wa, ra;
  logic [15:0] col, row, prow;
  logic [15:0] kk;
  logic signed [31:0] best;

  always_ff @(posedge clk) if (st == FILL && in_valid) mem[wa] <= in_pix;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= FILL; wa <= '0; ra <= '0; col <= '0; row <= '0; prow <= '0; kk <= '0;
      best <= '0; limbic <= 8'(NR); out_valid <= 1'b0; out_pix <= '0; out_row <= '0; done <= 1'b0;
      for (int i = 0; i < NR; i++) rsum[i] <= '0;
    end else begin
      out_valid <= 1'b0; done <= 1'b0;
      case (st)
        FILL: if (in_valid) begin
          rsum[row] <= ((col == 0) ? 32'd0 : rsum[row]) + 32'(in_pix);
          if (col == 16'(NA - 1)) begin
            col <= '0;
            if (row == 16'(NR - 1)) begin
              row <= '0; st <= FIND; kk <= 16'(KMIN); best <= '0; limbic <= 8'(NR);
            end else row <= row + 16'd1;
          end else col <= col + 16'd1;
          wa <= (wa == AW'(N - 1)) ? '0 : wa + 1'b1;
        end
        FIND: begin
          if (kk >= 16'(NR)) begin st <= PLAY; ra <= '0; prow <= '0; col <= '0; end
          else begin
            logic signed [31:0] g;
            g = signed'(rsum[kk]) - signed'(rsum[kk - 16'd1]);
            if (g > best) begin best <= g; limbic <= 8'(kk); end
            kk <= kk + 16'd1;
          end
        end
        PLAY: begin
          out_valid <= 1'b1;
          out_pix   <= mem[ra];
          out_row   <= prow;
          if (col == 16'(NA - 1)) begin col <= '0; prow <= prow + 16'd1; end
          else col <= col + 16'd1;
          if (ra == AW'(N - 1)) begin ra <= '0; st <= FILL; done <= 1'b1; end
          else ra <= ra + 1'b1;
        end
        default: st <= FILL;
      endcase
    end
  end
endmodule
