// ig_gate: the 4x4 parity preserving reversible "IG" gate.
//
// Function (as published):
//   P = A
//   Q = A ^ B
//   R = (A & B) ^ C
//   S = (B & D) ^ (~B & (A ^ D))
// The mapping is a permutation of the 16 input patterns (reversible), and
// P^Q^R^S == A^B^C^D (parity preserving), so a fault on any single line shows
// as a parity mismatch between the primary inputs and outputs. The gate is
// "one-through": A passes unchanged to P.
//
// Interface: four 1-bit inputs a..d, four 1-bit outputs p..s.
// Timing: purely combinational; counts as one unit delay in the gate-level
// delay figures.
module ig_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);

  always_comb begin
    p = a;
    q = a ^ b;
    r = (a & b) ^ c;
    s = (b & d) ^ (~b & (a ^ d));
  end

endmodule : ig_gate
