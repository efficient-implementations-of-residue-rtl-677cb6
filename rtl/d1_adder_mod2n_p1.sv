// d1_adder_mod2n_p1 -- final two-operand adder modulo 2^N+1 that delivers its
// result in diminished-1 (D1) form.
//
// Given N-bit x and y it returns the (N+1)-bit word
//     t = x + y + not(cout)  =  |x + y + 1|_(2^N+1),   0 <= t <= 2^N,
// where cout is the carry out of x + y. Read as a D1 word, t = {z, m}: z is the
// zero-indication bit and m the N-bit diminished-1 magnitude. t = 2^N
// ({1, 0...0}) happens exactly when x + y = 2^N - 1, i.e. when every bit
// propagates, so z is the group propagate P[N-1:0] and m is then all zeros.
//
// Structure (the usual parallel-prefix adder with inverted end-around carry):
// bitwise g/p, a Sklansky prefix network for the group terms, then one more
// level that injects cin = not(G[N-1:0]) into every carry:
//     c[0] = cin,  c[i] = G[i-1:0] | P[i-1:0] & cin,  m = p ^ c.
// The residue generator feeds it the two CSA outputs, so x + y + 1 is the
// D1 word of |X|. The relation t = x + y + not(cout) is the method's; the
// method leaves the adder's insides to a known published D1 adder, and the
// Sklansky prefix network used here is this design's choice.
// Combinational, depth ceil(log2 N) + 2 prefix levels.
module d1_adder_mod2n_p1 #(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  output logic         z,      // zero indication: 1 when the result is 0
  output logic [N-1:0] m,      // D1 magnitude: result - 1 when z = 0
  output logic         cout    // carry out of x + y (not(cout) re-enters)
);
  logic [N-1:0] g, p, gg, pp, c;
  logic         cin;

  assign g = x & y;
  assign p = x ^ y;

  prefix_gp #(.W(N)) u_prefix (.g(g), .p(p), .gg(gg), .pp(pp));

  always_comb begin
    cout = gg[N-1];
    cin  = ~gg[N-1];
    c[0] = cin;
    for (int unsigned i = 1; i < N; i++) c[i] = gg[i-1] | (pp[i-1] & cin);
    m = p ^ c;
    z = pp[N-1];
  end

  // A zero result must carry an all-zero magnitude.
  always_comb if (z) assert (m == '0) else $error("D1 zero word with nonzero magnitude");
endmodule
