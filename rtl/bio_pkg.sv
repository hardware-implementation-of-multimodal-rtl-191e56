// bio_pkg: types and helper functions shared by the fingerprint and iris pipelines.
// Pixels are 8-bit unsigned grey levels. Angles use an 8-bit binary angle: 256 units
// make a full turn, so orientations (0..180 degrees) occupy 0..127. A minutia is a
// position, an angle and a type bit; a polar minutia is the (r, theta, o) triplet of
// the pre-alignment matcher. The coordinate width (10 bits) is this design's choice so
// that a 296x560 fingerprint fits; the polar fields are 8 bits each as the paper states.
package bio_pkg;
  typedef logic [7:0] pix_t;
  typedef logic [7:0] ang_t;

  localparam int unsigned COORD_W = 10;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    ang_t               ang;
    logic               typ;   // 0: ridge ending, 1: bifurcation
  } minutia_t;

  typedef struct packed {
    logic [7:0] r;             // radial distance to the reference minutia (scaled)
    ang_t       t;             // radial angle relative to the reference orientation
    ang_t       o;             // orientation relative to the reference orientation
    logic       typ;
  } polar_t;

  typedef struct packed {
    logic [7:0] len;           // length of the segment to the nearest neighbour
    ang_t       ang;           // neighbour orientation relative to this minutia
  } segment_t;

  localparam real PI = 3.14159265358979323846;

  // Distance between two binary angles on the circle (0..128).
  function automatic logic [7:0] ang_dist(input ang_t a, input ang_t b);
    logic [7:0] d;
    d = a - b;
    return d[7] ? (~d + 8'd1) : d;
  endfunction

  // Integer square root of a 32-bit value (restoring method).
  function automatic logic [15:0] isqrt32(input logic [31:0] v);
    logic [31:0] rem, root, trial;
    rem = v; root = '0;
    for (int i = 15; i >= 0; i--) begin
      trial = root | (32'd1 << (2*i));
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root >> 1) | (32'd1 << (2*i));
      end else begin
        root = root >> 1;
      end
    end
    return root[15:0];
  endfunction

  // Fixed-point Gaussian tap weight, exp(-k^2 / (2 sigma^2)), scaled by 2^frac.
  function automatic int gauss_raw(input int k, input real sigma, input int frac);
    return int'($exp(-(real'(k*k)) / (2.0 * sigma * sigma)) * real'(1 << frac));
  endfunction
endpackage
