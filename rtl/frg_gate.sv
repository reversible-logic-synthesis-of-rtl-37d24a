// frg_gate: the 3x3 Fredkin gate (controlled swap).
//
// Function:
//   P = A
//   Q = ~A & B | A & C      (written A'B ^ AC; the two terms never overlap)
//   R = ~A & C | A & B      (A'C ^ AB)
// When A = 0 the lines B and C pass straight through; when A = 1 they are
// swapped. The gate is reversible and parity preserving (it only moves bits).
// In the BCD adder it is used two ways:
//   * with C = 0 it is an AND gate: R = A & B, with P and Q as garbage;
//   * with A = select it is a 2:1 multiplexer: Q = A ? C : B.
//
// Interface: three 1-bit inputs a..c, three 1-bit outputs p..r.
// Timing: purely combinational, one unit delay.
module frg_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);

  always_comb begin
    p = a;
    q = (~a & b) ^ (a & c);
    r = (~a & c) ^ (a & b);
  end

endmodule : frg_gate
