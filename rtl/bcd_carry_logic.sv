// bcd_carry_logic: decimal carry of one BCD digit, which is also the enable
// of the +6 correction.
//
// A BCD digit sum must be corrected (and a decimal carry sent on) when the
// binary sum C:Z3..Z0 exceeds 9, i.e. when C | Z3&Z2 | Z3&Z1. Two Fredkin
// gates with C input 0 form the AND terms and a PPHCG with D = 0 forms the
// 3-input XOR of (C, term1, term2) on its Q output, in place of a 3-input OR.
// C = 1 only when the binary sum is 16..19, where Z3 = 0, so C never overlaps
// a term. The two terms must not overlap either, which MODE decides:
//   CORR_EXCLUSIVE (default): gate 1 = FRG(Z2, Z3, 0) gives R = Z2&Z3 and
//     Q = ~Z2&Z3; gate 2 = FRG(Z1, ~Z2&Z3, 0) gives R = Z1&~Z2&Z3. The terms
//     are disjoint and the XOR equals the OR. Gate 1's Q is consumed, so
//     g[1] (g17) carries that internal line rather than a true garbage.
//   CORR_PAPER: gate 1 = FRG(Z3, Z2, 0), gate 2 = FRG(Z3, Z1, 0), terms
//     Z3&Z2 and Z3&Z1 as in the published schematic. Both are 1 for binary
//     sums 14 and 15, the XOR gives 0 there and the digit is left
//     uncorrected. Kept to reproduce the published netlist.
//
// Interface: c (binary carry), z (binary sum) in; cout and g = {g22..g16}
//   out, g16..g19 being the FRGs' P and Q lines and g20..g22 the PPHCG's
//   P, R and S.
// Timing: combinational, three gate levels (two in CORR_PAPER).
module bcd_carry_logic
  import rev_pkg::*;
#(
  parameter corr_mode_t MODE = CORR_EXCLUSIVE
) (
  input  logic       c,
  input  logic [3:1] z,      // Z3..Z1 of the binary sum (Z0 never matters)
  output logic       cout,
  output logic [6:0] g
);

  logic term1, term2, link;

  if (MODE == CORR_EXCLUSIVE) begin : g_excl
    frg_gate u_and_a (
      .a(z[2]), .b(z[3]), .c(1'b0),
      .p(g[0]), .q(link), .r(term1)
    );
    assign g[1] = link;
    frg_gate u_and_b (
      .a(z[1]), .b(link), .c(1'b0),
      .p(g[2]), .q(g[3]), .r(term2)
    );
  end else begin : g_paper
    frg_gate u_and_a (
      .a(z[3]), .b(z[2]), .c(1'b0),
      .p(g[0]), .q(g[1]), .r(term1)
    );
    frg_gate u_and_b (
      .a(z[3]), .b(z[1]), .c(1'b0),
      .p(g[2]), .q(g[3]), .r(term2)
    );
    assign link = 1'b0;
  end

  pphcg_gate u_xor3 (
    .a(c), .b(term1), .c(term2), .d(1'b0),
    .p(g[4]), .q(cout), .r(g[5]), .s(g[6])
  );

endmodule : bcd_carry_logic
