// moma4_mod2n_m1 -- 4-operand adder modulo 2^N-1: the mod 2^N-1 channel of
// the bi-residue generator.
//
// Since 2^N = 1 (mod 2^N-1), the halves of D_C = {dch, dcl} and
// D_S = {dsh, dsl} simply add:
//     r = |dch + dcl + dsh + dsl|_(2^N-1).
// Two CSA rows with end-around carry (csa_tree_mod2k_m1 with four N-bit
// operands) reduce them to two vectors and the end-around-carry adder
// adder_mod2n_m1 produces the residue in [0, 2^N-2] (zero has a single
// code). The equation is the method's; using the same EAC tree module with
// Q = 4 and this adder is this design's choice. Combinational.
module moma4_mod2n_m1 #(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0] dcl,
  input  logic [N-1:0] dch,
  input  logic [N-1:0] dsl,
  input  logic [N-1:0] dsh,
  output logic [N-1:0] r
);
  logic [3:0][N-1:0] ops;
  logic [N-1:0]      c2, s2;

  assign ops = {dsh, dsl, dch, dcl};

  csa_tree_mod2k_m1 #(.W(N), .Q(4)) u_csa (.ops(ops), .dc(c2), .ds(s2));

  adder_mod2n_m1 #(.N(N)) u_add (.x(c2), .y(s2), .r(r));
endmodule
