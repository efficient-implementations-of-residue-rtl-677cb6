// csa4_mod2n_p1 -- 4-operand carry-save stage modulo 2^N+1 of the residue
// generator with D1 output.
//
// Inputs are the N-bit halves of the two vectors left by the mod 2^(2N)-1 CSA
// tree, D_C = {dch, dcl} and D_S = {dsh, dsl}. Since 2^N = -1 (mod 2^N+1),
//     |X|_(2^N+1) = |dcl - dch + dsl - dsh|_(2^N+1),
// and each subtraction is done by inverting the operand: -B = not(B) + 2.
// Two CSA rows with inverted end-around carry (csa_ieac, each worth -1) then
// reduce the four operands:
//     row 1: dcl + not(dch) + dsl      -> d1, d2   (d1 + d2 - 1)
//     row 2: d1  + d2       + not(dsh) -> d3, d4   (d3 + d4 - 1)
// The constants cancel to
//     |X|_(2^N+1) = |d3 + d4 + 2|_(2^N+1),
// so the D1 word of |X|, |X-1|, is |d3 + d4 + 1|, which is exactly what the
// D1 adder returns. Operand order, inversions and constants all follow the
// published derivation of the generator; the only freedom taken here is that
// each row is a plain row of full adders. Combinational, two full-adder
// delays, 2N full adders.
module csa4_mod2n_p1 #(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0] dcl,
  input  logic [N-1:0] dch,
  input  logic [N-1:0] dsl,
  input  logic [N-1:0] dsh,
  output logic [N-1:0] d3,
  output logic [N-1:0] d4
);
  logic [N-1:0] d1, d2;

  csa_ieac #(.N(N)) u_row1 (.a(dcl), .b(~dch), .c(dsl),  .s(d1), .c_rot(d2));
  csa_ieac #(.N(N)) u_row2 (.a(d1),  .b(d2),   .c(~dsh), .s(d3), .c_rot(d4));
endmodule
