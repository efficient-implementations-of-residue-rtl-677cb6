// rns_pkg -- constants and elaboration-time helpers shared by the residue
// generators mod 2^n-1 and mod 2^n+1.
//
// The generators are purely combinational; this package only holds the
// arithmetic that sizes them: how many 2n-bit blocks a p-bit input splits
// into, and how a Wallace-style tree of 3:2 carry-save adders (CSAs) shrinks a
// set of operands level by level (three operands in, two out per CSA, the
// leftovers passed on unchanged).
package rns_pkg;

  // Defaults used throughout: modulus pair 2^n-1 / 2^n+1 with n = 3 (that is,
  // 7 and 9) and an 18-bit input, the sizes of the worked mod-9 example.
  localparam int unsigned DEF_N = 3;
  localparam int unsigned DEF_P = 18;

  // Number of w-bit blocks needed to hold p bits: ceil(p / w).
  function automatic int unsigned num_blocks(int unsigned p, int unsigned w);
    return (p + w - 1) / w;
  endfunction

  // Operands left after `lvl` levels of a 3:2 CSA tree fed with q operands.
  function automatic int unsigned ops_at_level(int unsigned q, int unsigned lvl);
    int unsigned m;
    m = q;
    for (int unsigned i = 0; i < lvl; i++) m = m - m / 3;
    return m;
  endfunction

  // Number of CSA levels needed to bring q operands down to two.
  function automatic int unsigned csa_levels(int unsigned q);
    int unsigned m;
    int unsigned l;
    m = q;
    l = 0;
    while (m > 2) begin
      m = m - m / 3;
      l++;
    end
    return l;
  endfunction

  // Full adders in a CSA tree reducing q operands of w bits to two: each
  // CSA removes one operand and costs w full adders.
  function automatic int unsigned csa_full_adders(int unsigned q, int unsigned w);
    return (q > 2) ? (q - 2) * w : 0;
  endfunction

endpackage
