// iris_normalise: unwraps the iris ring into a rectangular NR x NA image by sampling the
// buffered eye image along rays from the pupil centre: for radial row k and angle a (one
// degree per column, NA = 360, as in the paper's X = r cos, Y = r sin with a pi/180 step)
// the sample point is (cx + r cos a, cy + r sin a) with r = rp + k pixels. Each sample is
// bilinearly interpolated from its four neighbours, which are read one per cycle from the
// frame buffer, so one output pixel takes six cycles. Cosine and sine come from a table
// built at elaboration (Q14); positions are Q8. The output stream is in raster order
// (row k = radius, column a = angle) followed by a done pulse. The mapping and bilinear
// interpolation are the paper's; the one-pixel radial step, NR and the fixed point are
// this design's choices. Points outside the image are clamped to its border.
module iris_normalise #(
  parameter int unsigned W  = 320,
  parameter int unsigned H  = 240,
  parameter int unsigned NA = 360,
  parameter int unsigned NR = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [9:0]    cx,
  input  logic [9:0]    cy,
  input  logic [9:0]    rp,
  output logic [9:0]    rx,
  output logic [9:0]    ry,
  input  bio_pkg::pix_t rdata,
  output logic          out_valid,
  output bio_pkg::pix_t out_pix,
  output logic          done,
  output logic          busy
);
  typedef int ttab_t [NA];
  function automatic ttab_t make_trig(input bit sine);
    ttab_t t;
    for (int a = 0; a < NA; a++) begin
      real th;
      th = 2.0 * bio_pkg::PI * real'(a) / real'(NA);
      t[a] = int'((sine ? $sin(th) : $cos(th)) * 16384.0);
    end
    return t;
  endfunction
  localparam ttab_t COS = make_trig(1'b0);
  localparam ttab_t SIN = make_trig(1'b1);

  typedef enum logic [2:0] {IDLE, POS, RD0, RD1, RD2, RD3, OUT} state_t;
  state_t st;
  logic [15:0] a, k;
  logic [9:0]  x0, y0;
  logic [7:0]  fx, fy;
  logic [7:0]  p00, p01, p10, p11;

  // sample position of (k, a)
  logic [9:0] px0, py0;
  logic [7:0] pfx, pfy;
  always_comb begin
    int r, xq, yq;
    r  = int'(rp) + int'(k);
    xq = (int'(cx) << 8) + ((r * COS[a]) >>> 6);
    yq = (int'(cy) << 8) + ((r * SIN[a]) >>> 6);
    if (xq < 0) xq = 0;
    if (yq < 0) yq = 0;
    if (xq > (int'(W) - 2) * 256 + 255) xq = (int'(W) - 2) * 256 + 255;
    if (yq > (int'(H) - 2) * 256 + 255) yq = (int'(H) - 2) * 256 + 255;
    px0 = 10'(xq >> 8); pfx = 8'(xq);
    py0 = 10'(yq >> 8); pfy = 8'(yq);
  end

  always_comb begin
    rx = x0; ry = y0;
    case (st)
      RD1: begin rx = x0 + 10'd1; ry = y0; end
      RD2: begin rx = x0;         ry = y0 + 10'd1; end
      RD3: begin rx = x0 + 10'd1; ry = y0 + 10'd1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; a <= '0; k <= '0; x0 <= '0; y0 <= '0; fx <= '0; fy <= '0;
      p00 <= '0; p01 <= '0; p10 <= '0; p11 <= '0; out_valid <= 1'b0; out_pix <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0; done <= 1'b0;
      case (st)
        IDLE: if (start) begin st <= POS; a <= '0; k <= '0; end
        POS:  begin x0 <= px0; y0 <= py0; fx <= pfx; fy <= pfy; st <= RD0; end
        RD0:  st <= RD1;
        RD1:  begin p00 <= rdata; st <= RD2; end
        RD2:  begin p01 <= rdata; st <= RD3; end
        RD3:  begin p10 <= rdata; st <= OUT; end
        OUT: begin
          logic [31:0] top, bot, v;
          top = 32'(p00) * (32'd256 - 32'(fx)) + 32'(p01) * 32'(fx);
          bot = 32'(p10) * (32'd256 - 32'(fx)) + 32'(rdata) * 32'(fx);
          v   = (top * (32'd256 - 32'(fy)) + bot * 32'(fy) + 32'd32768) >> 16;
          out_valid <= 1'b1;
          out_pix   <= (v > 255) ? 8'd255 : v[7:0];
          if (a == 16'(NA - 1)) begin
            a <= '0;
            if (k == 16'(NR - 1)) begin k <= '0; st <= IDLE; done <= 1'b1; end
            else begin k <= k + 16'd1; st <= POS; end
          end else begin
            a <= a + 16'd1; st <= POS;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end
  assign busy = (st != IDLE);
endmodule
