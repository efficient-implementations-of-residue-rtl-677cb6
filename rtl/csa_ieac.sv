// csa_ieac -- one N-bit carry-save adder modulo 2^N+1 with inverted
// end-around carry.
//
// The carry out of the top full adder has weight 2^N = -1 (mod 2^N+1). Writing
// -c as (not c) - 1, it re-enters position 0 inverted, at the price of a
// constant -1 that the caller must account for:
//     a + b + c = s + c_rot - 1   (mod 2^N+1),
//     c_rot = {cy[N-2:0], ~cy[N-1]}
// This is the CSA step of the modulo 2^N+1 property used twice in the final
// 4-operand adder. Combinational; one full-adder delay. Requires N >= 2.
module csa_ieac #(
  parameter int unsigned N = 3
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [N-1:0] c,
  output logic [N-1:0] s,
  output logic [N-1:0] c_rot
);
  logic [N-1:0] cy;

  always_comb begin
    s     = a ^ b ^ c;
    cy    = (a & b) | (a & c) | (b & c);
    c_rot = {cy[N-2:0], ~cy[N-1]};
  end

  initial assert (N >= 2) else $error("csa_ieac needs N >= 2");
endmodule
