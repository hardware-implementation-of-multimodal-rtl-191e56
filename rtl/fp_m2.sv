// fp_m2: memory M2 of the fingerprint matcher, holding the minutiae in polar form
// (r, theta, o, type) relative to the reference minutia of their set. Bank 0 is the input
// print, bank 1 the template, NMAX entries each; every field is 8 bits as the paper states
// for angles and coordinates. One synchronous write port and two asynchronous read ports
// let the matching block compare an input and a template minutia per cycle.
module fp_m2 #(
  parameter int unsigned NMAX = 64
) (
  input  logic            clk,
  input  logic            we,
  input  logic            wbank,
  input  logic [$clog2(NMAX)-1:0] waddr,
  input  bio_pkg::polar_t wdata,
  input  logic            abank,
  input  logic [$clog2(NMAX)-1:0] aaddr,
  output bio_pkg::polar_t adata,
  input  logic            bbank,
  input  logic [$clog2(NMAX)-1:0] baddr,
  output bio_pkg::polar_t bdata
);
  bio_pkg::polar_t mem [2][NMAX];
  always_ff @(posedge clk) if (we) mem[wbank][waddr] <= wdata;
  assign adata = mem[abank][aaddr];
  assign bdata = mem[bbank][baddr];
endmodule
