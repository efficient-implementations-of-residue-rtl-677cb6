// moma4_mod2n_p1_d1 -- 4-operand adder modulo 2^N+1 with diminished-1 output:
// the final block of the residue generator mod 2^N+1.
//
// From the halves of the two 2N-bit vectors D_C = {dch, dcl} and
// D_S = {dsh, dsl} left by the CSA tree modulo 2^(2N)-1 it computes
//     x_star = |dcl - dch + dsl - dsh - 1|_(2^N+1) = |X - 1|_(2^N+1),
// the (N+1)-bit D1 word of X = D_C + D_S: x_star[N] is the zero-indication
// bit and x_star[N-1:0] the diminished magnitude (X-1 when X is not 0).
// It is two inverted-EAC CSA rows (csa4_mod2n_p1) followed by the parallel-
// prefix D1 adder (d1_adder_mod2n_p1); its structure is the same for every
// input width p. No correction constant is needed. This is the method's
// final block as published; the D1 adder's carry-out port is left open here
// (it exists for observation in testbenches). Combinational.
module moma4_mod2n_p1_d1 #(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0] dcl,
  input  logic [N-1:0] dch,
  input  logic [N-1:0] dsl,
  input  logic [N-1:0] dsh,
  output logic [N:0]   x_star
);
  logic [N-1:0] d3, d4, m;
  logic         z;

  csa4_mod2n_p1 #(.N(N)) u_csa4 (
    .dcl(dcl), .dch(dch), .dsl(dsl), .dsh(dsh), .d3(d3), .d4(d4)
  );

  d1_adder_mod2n_p1 #(.N(N)) u_add (.x(d3), .y(d4), .z(z), .m(m), .cout());

  assign x_star = {z, m};
endmodule
