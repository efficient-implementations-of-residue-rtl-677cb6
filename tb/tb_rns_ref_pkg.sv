// tb_rns_ref_pkg -- reference arithmetic for the residue-generator
// testbenches, written directly from the definitions (plain % on wide
// unsigned integers), independent of any carry-save or end-around-carry
// structure in the design.
package tb_rns_ref_pkg;

  typedef logic [255:0] wide_t;

  // |x|_m for a wide unsigned x.
  function automatic int unsigned mod_u(wide_t x, int unsigned m);
    wide_t r;
    r = x % wide_t'(m);
    return int'(r[31:0]);
  endfunction

  // Diminished-1 word of a residue r mod 2^n+1: {1, 0..0} for r = 0,
  // otherwise {0, r-1}.
  function automatic int unsigned d1_word(int unsigned r, int unsigned n);
    return (r == 0) ? (32'd1 << n) : r - 1;
  endfunction

  // Random wide value of p bits.
  function automatic wide_t rand_bits(int unsigned p);
    wide_t v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    if (p < 256) v = v & ((wide_t'(1) << p) - 1);
    return v;
  endfunction

endpackage
