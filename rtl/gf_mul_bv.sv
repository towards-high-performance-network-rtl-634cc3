// gf_mul_bv -- bit-parallel GF(2^N) multiplier with a bounded-value operand.
//
// p = a * b in GF(2^N) (polynomial basis, reduction polynomial POLY), where
// b is restricted to the bounded-value subset L(2^S): the field elements whose
// binary value is below 2^S, i.e. whose upper N-S bits are zero.  Only the S
// low bits of b are therefore an input.
//
// The shift-and-add loop is unrolled into a chain of S partial multipliers.
// Stage i adds the running multiple ta = a*x^i into the product when bit i of
// b is set, then doubles ta: shift left by one and, when the bit shifted out
// was 1, XOR the reduction polynomial.  With S = N the block is an ordinary
// full multiplier (2N^2 one-bit XORs); with S = 2 it costs about 2NS XORs.
// The stage order (accumulate, then double) follows the published algorithm;
// the multiplexer-plus-XOR form of each stage follows its chain diagram.
//
// Purely combinational; no clock.
module gf_mul_bv #(
  parameter int unsigned N    = bats_pkg::ELEM_W,
  parameter int unsigned S    = bats_pkg::BV_S,
  parameter logic [N:0]  POLY = bats_pkg::GF_POLY
) (
  input  logic [N-1:0] a,
  input  logic [S-1:0] b,
  output logic [N-1:0] p
);

  logic [N-1:0] ta  [S+1];   // a * x^i, reduced
  logic [N-1:0] acc [S+1];   // partial products summed so far

  assign ta[0]  = a;
  assign acc[0] = '0;

  for (genvar i = 0; i < S; i++) begin : g_stage
    // accumulate: mux on b[i] selects ta or 0, then an N-bit XOR
    assign acc[i+1] = acc[i] ^ (b[i] ? ta[i] : '0);
    // double: mux on the outgoing MSB selects POLY or 0, then an N-bit XOR
    assign ta[i+1]  = {ta[i][N-2:0], 1'b0} ^ (ta[i][N-1] ? POLY[N-1:0] : '0);
  end

  assign p = acc[S];

endmodule
