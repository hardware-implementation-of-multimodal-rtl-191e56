// iris_db: template database in SRAM. It holds NP enrolled iris templates (the paper
// stores five persons for its hardware test) of M words each; a word is the 6-bit code of
// one pixel plus its iris mask bit. One synchronous write port (used at enrolment) and one
// asynchronous read port (used by the matcher, which walks the template in step with the
// test code). valid[p] tells whether person p has been enrolled.
module iris_db #(
  parameter int unsigned NP = 5,
  parameter int unsigned M  = 360 * 32,
  parameter int unsigned WW = 7
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [$clog2(NP)-1:0] wperson,
  input  logic [$clog2(M)-1:0]  waddr,
  input  logic [WW-1:0] wdata,
  input  logic [$clog2(NP)-1:0] rperson,
  input  logic [$clog2(M)-1:0]  raddr,
  output logic [WW-1:0] rdata,
  output logic [NP-1:0] valid
);
  logic [WW-1:0] mem [NP][M];
  always_ff @(posedge clk) if (we) mem[wperson][waddr] <= wdata;
  assign rdata = mem[rperson][raddr];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else if (we && waddr == $clog2(M)'(M - 1)) valid[wperson] <= 1'b1;
  end
endmodule
