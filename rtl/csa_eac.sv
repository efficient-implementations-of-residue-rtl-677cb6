// csa_eac -- one W-bit carry-save adder (a row of W full adders) with
// end-around carry (EAC), i.e. a 3:2 compressor modulo 2^W-1.
//
// Each bit position i adds a[i]+b[i]+c[i] into a sum bit s[i] and a carry of
// weight 2^(i+1). Because 2^W = 1 (mod 2^W-1), the carry out of the top
// position has weight 1 and is fed back to position 0, so the carry vector is
// simply rotated left by one place:
//     a + b + c = s + c_rot   (mod 2^W-1)
// This is the standard EAC carry-save row the method builds its trees from.
// The block is combinational; its delay is that of one full adder.
module csa_eac #(
  parameter int unsigned W = 6
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] s,
  output logic [W-1:0] c_rot
);
  logic [W-1:0] cy;

  always_comb begin
    s  = a ^ b ^ c;
    cy = (a & b) | (a & c) | (b & c);
  end

  if (W == 1) begin : g_w1
    assign c_rot = cy;
  end else begin : g_wn
    assign c_rot = {cy[W-2:0], cy[W-1]};
  end
endmodule
