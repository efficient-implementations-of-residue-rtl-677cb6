// csa_tree_mod2k_m1 -- Q-operand, W-bit carry-save adder tree with end-around
// carry: a multi-operand reduction modulo 2^W-1.
//
// It reduces Q operands D_0..D_{Q-1} to a carry vector dc and a sum vector ds
// with
//     |D_0 + ... + D_{Q-1}|_(2^W-1) = |dc + ds|_(2^W-1).
// The tree is Wallace-style: on every level the operands are taken three at a
// time into csa_eac rows (W full adders whose top carry is rotated back into
// bit 0), and the one or two left over are passed to the next level. No signal
// is ever inverted, so the reduction adds no correction constant. It uses
// (Q-2)*W full adders; with W = 2n and a p-bit input cut into Q = p/(2n)
// blocks that is p - 4n full adders, the part a bi-residue generator shares
// between its mod 2^n-1 and mod 2^n+1 channels.
// The method fixes what the tree computes and that it uses end-around carry
// only; the Wallace arrangement of the rows is this design's choice.
// Q = 2 is wired straight through; Q = 1 gives ds = D_0, dc = 0.
// Combinational; depth rns_pkg::csa_levels(Q) full adders.
// Operand j is ops[j]; for the residue generator ops[j] is bits
// (j+1)*W-1 .. j*W of the input.
module csa_tree_mod2k_m1 #(
  parameter int unsigned W = 6,
  parameter int unsigned Q = 3
) (
  input  logic [Q-1:0][W-1:0] ops,
  output logic [W-1:0]        dc,
  output logic [W-1:0]        ds
);
  localparam int unsigned NLEV = rns_pkg::csa_levels(Q);

  // lv[l] holds the operands present after l levels; unused slots are zero.
  wire [Q-1:0][W-1:0] lv [NLEV+1];

  assign lv[0] = ops;

  for (genvar l = 0; l < NLEV; l++) begin : g_lev
    localparam int unsigned M = rns_pkg::ops_at_level(Q, l);
    localparam int unsigned G = M / 3;
    for (genvar k = 0; k < G; k++) begin : g_csa
      csa_eac #(.W(W)) u_csa (
        .a    (lv[l][3*k]),
        .b    (lv[l][3*k+1]),
        .c    (lv[l][3*k+2]),
        .s    (lv[l+1][2*k]),
        .c_rot(lv[l+1][2*k+1])
      );
    end
    for (genvar k = 2 * G; k < Q; k++) begin : g_pass
      if (k < 2 * G + M % 3) begin : g_fwd
        assign lv[l+1][k] = lv[l][3*G + (k - 2*G)];
      end else begin : g_zero
        assign lv[l+1][k] = '0;
      end
    end
  end

  assign ds = lv[NLEV][0];
  if (Q >= 2) begin : g_two
    assign dc = lv[NLEV][1];
  end else begin : g_one
    assign dc = '0;
  end
endmodule
