// pphcg_gate: the 4x4 parity preserving "HC" gate (PPHCG).
//
// Function:
//   P = B ^ C ^ D
//   Q = A ^ B ^ C
//   R = A ^ B ^ D
//   S = A ^ C ^ D
// Each output is the XOR of three of the four inputs. The map is linear and
// invertible over GF(2) (it is its own inverse up to a reordering of the
// outputs) and P^Q^R^S == A^B^C^D, so the gate is reversible and parity
// preserving. With D = 0, Q is a 3-input XOR of A, B and C, which is how the
// BCD adder uses it. The Q equation's last operand (C) is this design's
// reading of the published symbol; it is the only choice that keeps the gate
// reversible and parity preserving.
//
// Interface: four 1-bit inputs a..d, four 1-bit outputs p..s.
// Timing: purely combinational, one unit delay.
module pphcg_gate (
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
    p = b ^ c ^ d;
    q = a ^ b ^ c;
    r = a ^ b ^ d;
    s = a ^ c ^ d;
  end

endmodule : pphcg_gate
