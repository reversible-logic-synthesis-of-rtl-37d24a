// ftfa: fault tolerant full adder built from two IG gates.
//
// The first IG gets (A, B, 0, 0) and produces P=A, Q=A^B, R=A&B and
// S=A&~B (garbage G1). The second IG gets (A^B, Cin, A&B, A) and produces
//   P = A^B                          -> garbage G2 (also the bit propagate)
//   Q = A^B^Cin                      -> Sum
//   R = (A^B)&Cin ^ A&B              -> Cout
//   S = Cin&A ^ ~Cin&B               -> garbage G3
// Two constant inputs, three garbage outputs: the minimum for a parity
// preserving full adder. Because both gates preserve parity,
// A^B^Cin == Sum^Cout^G1^G2^G3 for every input.
//
// The wiring follows the published schematic; which first-gate output feeds
// the second gate's D input (A) is this design's reading of the one wire the
// schematic does not label.
//
// Interface: a, b, cin in; sum, cout and g = {G3, G2, G1} out.
// Timing: combinational, two gate levels (the "two clock cycles" of the
// gate-count comparison are gate levels, not clocked stages).
module ftfa (
  input  logic       a,
  input  logic       b,
  input  logic       cin,
  output logic       sum,
  output logic       cout,
  output logic [2:0] g      // {G3, G2, G1}; g[1] = a ^ b
);

  logic a_pass, a_xor_b, a_and_b;

  ig_gate u_ig0 (
    .a(a), .b(b), .c(1'b0), .d(1'b0),
    .p(a_pass), .q(a_xor_b), .r(a_and_b), .s(g[0])
  );

  ig_gate u_ig1 (
    .a(a_xor_b), .b(cin), .c(a_and_b), .d(a_pass),
    .p(g[1]), .q(sum), .r(cout), .s(g[2])
  );

endmodule : ftfa
