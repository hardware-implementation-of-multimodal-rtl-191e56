// cordic: pipelined vectoring-mode CORDIC. For a signed vector (x, y) it returns the
// modulus sqrt(x^2+y^2) and the angle atan2(y, x) as an 8-bit binary angle (256 units per
// turn). One vector can enter every cycle; results leave ITER+2 cycles later with
// out_valid. The left half-plane is first folded by a 180 degree rotation; each stage then
// rotates by +-atan(2^-i), and the modulus is scaled by the CORDIC gain 1/1.6468 at the
// end. The paper names CORDIC as the unit that computes the moduli and angles of the
// polar minutiae; the pipelining, the iteration count and the angle format are this
// design's choices. It also serves the orientation estimator's arctangent.
module cordic #(
  parameter int unsigned IW   = 24,
  parameter int unsigned ITER = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_x,
  input  logic signed [IW-1:0] in_y,
  output logic                 out_valid,
  output logic [IW-1:0]        out_mag,
  output logic [7:0]           out_ang
);
  localparam int unsigned XW = IW + 2;
  typedef int atab_t [ITER];
  function automatic atab_t make_atan();
    atab_t t;
    for (int i = 0; i < ITER; i++)
      t[i] = int'($atan(1.0 / real'(longint'(1) << i)) / (2.0 * bio_pkg::PI) * 65536.0);
    return t;
  endfunction
  localparam atab_t AT = make_atan();

  logic signed [XW-1:0] xs [ITER+1];
  logic signed [XW-1:0] ys [ITER+1];
  logic        [15:0]   zs [ITER+1];
  logic                 vs [ITER+1];

  // stage 0: fold into the right half-plane
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vs[0] <= 1'b0; xs[0] <= '0; ys[0] <= '0; zs[0] <= '0;
    end else begin
      vs[0] <= in_valid;
      if (in_x < 0) begin
        xs[0] <= -XW'(in_x); ys[0] <= -XW'(in_y); zs[0] <= 16'h8000;
      end else begin
        xs[0] <= XW'(in_x);  ys[0] <= XW'(in_y);  zs[0] <= 16'h0000;
      end
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vs[i+1] <= 1'b0; xs[i+1] <= '0; ys[i+1] <= '0; zs[i+1] <= '0;
      end else begin
        vs[i+1] <= vs[i];
        if (ys[i] >= 0) begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + 16'(AT[i]);
        end else begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - 16'(AT[i]);
        end
      end
    end
  end

  // gain compensation: 0.607253 * 2^15 = 19898
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_mag <= '0; out_ang <= '0;
    end else begin
      logic [XW+15:0] m;
      m = (XW+16)'(xs[ITER]) * (XW+16)'(19898);
      out_valid <= vs[ITER];
      out_mag   <= IW'(m >> 15);
      out_ang   <= 8'((zs[ITER] + 16'h0080) >> 8);
    end
  end
endmodule
