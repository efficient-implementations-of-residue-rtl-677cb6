// prefix_gp -- Sklansky parallel-prefix network for carry generate/propagate.
//
// From the bitwise generate g[i] = a[i]&b[i] and propagate p[i] = a[i]^b[i]
// it forms, for every position i, the group terms over bits i..0:
//     G[i] = carry out of bits i..0 with no carry in,
//     P[i] = all of bits i..0 propagate.
// Level l (0 <= l < ceil(log2 W)) lets every bit whose index has bit l set
// absorb the group ending just below its 2^(l+1)-aligned half, so the depth
// is ceil(log2 W) prefix operators. Both modular adders add their end-around
// carry on top of these group terms in one extra level. Combinational.
module prefix_gp #(
  parameter int unsigned W = 3
) (
  input  logic [W-1:0] g,
  input  logic [W-1:0] p,
  output logic [W-1:0] gg,
  output logic [W-1:0] pp
);
  always_comb begin
    gg = g;
    pp = p;
    for (int unsigned l = 0; (1 << l) < W; l++) begin
      for (int unsigned i = 0; i < W; i++) begin
        if (((i >> l) & 1) == 1) begin
          // j: last bit of the lower half of i's 2^(l+1)-aligned group; it is
          // not updated on this level, so in-place update is safe.
          gg[i] = gg[i] | (pp[i] & gg[((i >> l) << l) - 1]);
          pp[i] = pp[i] & pp[((i >> l) << l) - 1];
        end
      end
    end
  end
endmodule
