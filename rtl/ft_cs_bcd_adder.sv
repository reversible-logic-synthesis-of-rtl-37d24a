// ft_cs_bcd_adder: one digit of a fault tolerant carry skip BCD adder built
// only from parity preserving reversible gates: 8 fault tolerant full adders
// (16 IG gates), 6 Fredkin gates and 1 PPHCG, 15 reversible units in all.
//
// Data flow (all combinational):
//   1. Binary add.   A 4-bit ft_rca adds x + y + cin, giving Z3..Z0 and the
//                    ripple carry C4. Its cells' A^B garbage lines are the
//                    bit propagates p3..p0.
//   2. Block skip.   ft_and4 forms P = p0&p1&p2&p3 with three Fredkin gates.
//                    One Fredkin gate FRG(P, C4, cin) then selects
//                    C = P ? cin : C4 on its Q output. When P = 1 the ripple
//                    carry equals cin anyway, so C is the true binary carry,
//                    but it no longer waits for the ripple through four cells.
//   3. Decimal carry. bcd_carry_logic computes cout = C | Z3&Z2 | Z3&Z1 with
//                    two Fredkin AND gates and a PPHCG used as a 3-input XOR.
//   4. Correction.   A second 4-bit ft_rca adds 0,cout,cout,0 (i.e. 6 when
//                    cout = 1) to Z with carry in 0. Its carry out is garbage.
//
// Garbage lines g[35:0] follow the published schematic's numbering:
//   g0..g7   top-row cells, g[2i] = G1 and g[2i+1] = G3 of bit i
//   g8..g13  AND4 Fredkin gates          g14, g15  skip gate P and R
//   g16..g22 decimal carry logic          g23..g34  correction-row cells
//   g35      correction-row carry out
// Every gate preserves parity, so a single stuck or flipped line inside a
// gate shows as a parity difference between that gate's inputs and outputs.
// As in the schematic, Z1..Z3 and cout fan out to more than one gate.
//
// Departures from the published schematic, all this design's choices:
//   * MODE defaults to CORR_EXCLUSIVE, which makes the two AND terms
//     disjoint so the XOR-for-OR substitution is exact (see bcd_carry_logic);
//     MODE = CORR_PAPER gives the schematic's literal terms, which fail for
//     binary digit sums 14 and 15.
//   * The correction row's carry in is 0; the schematic labels it Cin, which
//     would add the incoming carry twice.
//
// Interface: x, y (BCD digits 0..9) and cin in; s (BCD digit), cout and g out.
// Inputs above 9 are outside the design's range.
// Timing: combinational, no clock or reset.
module ft_cs_bcd_adder
  import rev_pkg::*;
#(
  parameter corr_mode_t MODE = CORR_EXCLUSIVE
) (
  input  logic [3:0]             x,
  input  logic [3:0]             y,
  input  logic                   cin,
  output logic [3:0]             s,
  output logic                   cout,
  output logic [BCD_GARBAGE-1:0] g
);

  // Stage 1: binary add of the two digits.
  logic [3:0]  z;          // binary sum Z3..Z0
  logic        c4;         // ripple carry out of the top row
  logic [3:0]  prop;       // bit propagates x_i ^ y_i
  logic [11:0] g_top;      // top-row cell garbage, {G3,G2,G1} per bit

  ft_rca #(.N(4)) u_add (
    .x(x), .y(y), .cin(cin),
    .sum(z), .cout(c4), .g(g_top)
  );

  for (genvar i = 0; i < 4; i++) begin : g_top_garbage
    assign prop[i]    = g_top[3*i + 1];  // G2 = x_i ^ y_i
    assign g[2*i]     = g_top[3*i];      // G1
    assign g[2*i + 1] = g_top[3*i + 2];  // G3
  end

  // Stage 2: block propagate and Fredkin carry skip.
  logic blk_p;             // all four bits propagate
  logic c_bin;             // binary carry of the digit: blk_p ? cin : c4

  ft_and4 u_and4 (
    .p(prop), .all_p(blk_p), .g(g[13:8])
  );

  frg_gate u_skip (
    .a(blk_p), .b(c4), .c(cin),
    .p(g[14]), .q(c_bin), .r(g[15])
  );

  // Stage 3: decimal carry / correction enable.
  bcd_carry_logic #(.MODE(MODE)) u_dcarry (
    .c(c_bin), .z(z[3:1]), .cout(cout), .g(g[22:16])
  );

  // Stage 4: add 6 (0110) when the decimal carry is set.
  ft_rca #(.N(4)) u_corr (
    .x(z), .y({1'b0, cout, cout, 1'b0}), .cin(1'b0),
    .sum(s), .cout(g[35]), .g(g[34:23])
  );

endmodule : ft_cs_bcd_adder
