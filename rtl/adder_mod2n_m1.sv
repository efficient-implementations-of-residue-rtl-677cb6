// adder_mod2n_m1 -- final two-operand adder modulo 2^N-1 with end-around
// carry, giving the residue in [0, 2^N-2].
//
// The carry out of x + y has weight 2^N = 1 (mod 2^N-1) and re-enters at bit
// 0. Using cin = G[N-1:0] | P[N-1:0] (carry out, or all bits propagating)
// folds the all-ones pattern (the second code of zero) onto 0 whenever
// x + y = 2^N-1. The only operand pair still producing all ones is
// x = y = 2^N-1 (sum 2^(N+1)-2, also zero mod 2^N-1); a final N-input AND
// clears it, so the output is always the single, normal residue.
// Structure: bitwise g/p, Sklansky prefix network, one end-around level.
// The method only calls for an adder mod 2^N-1 after the shared tree; the
// prefix structure and the single code for zero are this design's choices.
// Combinational.
module adder_mod2n_m1 #(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  output logic [N-1:0] r
);
  logic [N-1:0] g, p, gg, pp, c, s;
  logic         cin;

  assign g = x & y;
  assign p = x ^ y;

  prefix_gp #(.W(N)) u_prefix (.g(g), .p(p), .gg(gg), .pp(pp));

  always_comb begin
    cin  = gg[N-1] | pp[N-1];
    c[0] = cin;
    for (int unsigned i = 1; i < N; i++) c[i] = gg[i-1] | (pp[i-1] & cin);
    s = p ^ c;
    r = (&s) ? '0 : s;
  end

  // The residue never uses the second (all-ones) code of zero.
  always_comb assert (r != '1) else $error("mod 2^N-1 residue in all-ones form");
endmodule
