// biresgen_mod2n_pm1 -- p-input bi-residue generator for the conjugate moduli
// 2^N-1 and 2^N+1, the latter delivered in diminished-1 (D1) form.
//
// One CSA tree with end-around carry reduces the P-bit input modulo
// 2^(2N)-1 to two 2N-bit vectors D_C and D_S. Because both 2^N-1 and 2^N+1
// divide 2^(2N)-1, both residues follow from these vectors:
//     res_m1     = |D_CH + D_CL + D_SH + D_SL|_(2^N-1)
//     res_p1_d1  = |D_CL - D_CH + D_SL - D_SH - 1|_(2^N+1)
// (H/L: upper/lower N bits). The tree lives inside the mod 2^N+1 generator
// (resgen_mod2n_p1_d1), which exports D_C and D_S; the mod 2^N-1 channel is a
// 4-operand adder on the same halves (moma4_mod2n_m1). Sharing the tree saves
// the p - 4n full adders that a second tree would cost.
// Outputs: res_m1 in [0, 2^N-2]; res_p1_d1 = {z, m} with z = 1 iff
// |x|_(2^N+1) = 0 and m = |x|_(2^N+1) - 1 otherwise (m = 0 when z = 1).
// The sharing scheme and both channel equations follow the published method;
// the default sizes (N = 3, P = 18: moduli 7 and 9) come from its mod-9
// example. Fully combinational: no clock, no handshake; results are valid one
// propagation delay after x changes.
module biresgen_mod2n_pm1 #(
  parameter int unsigned N = rns_pkg::DEF_N,
  parameter int unsigned P = rns_pkg::DEF_P
) (
  input  logic [P-1:0] x,
  output logic [N-1:0] res_m1,     // |x| mod 2^N-1
  output logic [N:0]   res_p1_d1   // D1 word of |x| mod 2^N+1
);
  logic [2*N-1:0] dc, ds;

  resgen_mod2n_p1_d1 #(.N(N), .P(P)) u_p1 (
    .x(x), .x_star(res_p1_d1), .dc(dc), .ds(ds)
  );

  moma4_mod2n_m1 #(.N(N)) u_m1 (
    .dcl(dc[N-1:0]), .dch(dc[2*N-1:N]), .dsl(ds[N-1:0]), .dsh(ds[2*N-1:N]),
    .r(res_m1)
  );
endmodule
