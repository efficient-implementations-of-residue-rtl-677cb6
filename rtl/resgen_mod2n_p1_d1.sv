// resgen_mod2n_p1_d1 -- p-input residue generator modulo 2^N+1 whose output is
// in diminished-1 (D1) form.
//
// The P-bit input x is cut, from the least significant end, into
// Q = ceil(P/(2N)) blocks of 2N bits (the top block padded with zeros). A
// Q-operand CSA tree with end-around carry computes the sum of the blocks
// modulo 2^(2N)-1 as two vectors dc and ds; since 2^N+1 divides 2^(2N)-1 the
// pair still carries |x|_(2^N+1). Their N-bit halves then go through the
// 4-operand adder mod 2^N+1 with D1 output, which gives
//     x_star = |x - 1|_(2^N+1)   ({zero bit, N-bit magnitude}).
// The tree inverts nothing and the final block is the same for every P, so no
// input-width-dependent correction constant exists anywhere. For P <= 4N the
// tree is empty and the circuit is the final 4-operand adder alone.
// dc and ds are also outputs so that a mod 2^N-1 channel can share the tree
// (a choice of this design: the method shares the tree but does not say
// where it lives). Accepting any P >= 1, not only P >= 4N, is also this
// design's choice. Combinational.
module resgen_mod2n_p1_d1 #(
  parameter int unsigned N = rns_pkg::DEF_N,
  parameter int unsigned P = rns_pkg::DEF_P
) (
  input  logic [P-1:0]   x,
  output logic [N:0]     x_star,  // {zero indication, D1 magnitude}
  output logic [2*N-1:0] dc,      // shared CSA-tree outputs, |x| = |dc+ds| mod 2^(2N)-1
  output logic [2*N-1:0] ds
);
  localparam int unsigned Q = rns_pkg::num_blocks(P, 2 * N);

  logic [Q-1:0][2*N-1:0] blocks;

  assign blocks = (Q * 2 * N)'(x);

  csa_tree_mod2k_m1 #(.W(2 * N), .Q(Q)) u_tree (.ops(blocks), .dc(dc), .ds(ds));

  moma4_mod2n_p1_d1 #(.N(N)) u_final (
    .dcl   (dc[N-1:0]),
    .dch   (dc[2*N-1:N]),
    .dsl   (ds[N-1:0]),
    .dsh   (ds[2*N-1:N]),
    .x_star(x_star)
  );

  initial assert (N >= 2) else $error("resgen_mod2n_p1_d1 needs N >= 2");
endmodule
