// rev_pkg: types shared by the fault tolerant carry skip BCD adder.
//
// corr_mode_t selects how the decimal carry logic forms its two AND terms
// before they are combined by a 3-input XOR (see bcd_carry_logic):
//   CORR_PAPER     : terms Z3&Z2 and Z3&Z1, wired as the published schematic.
//                    The XOR then differs from the OR it replaces when the
//                    binary digit sum is 14 or 15, so this mode is kept only
//                    to reproduce the published netlist.
//   CORR_EXCLUSIVE : terms Z3&Z2 and Z3&~Z2&Z1 (this design's default). The
//                    terms never overlap, so XOR equals OR and the adder is
//                    correct for every pair of BCD digits. Same gate count.
package rev_pkg;

  typedef enum logic {
    CORR_PAPER     = 1'b0,
    CORR_EXCLUSIVE = 1'b1
  } corr_mode_t;

  // Number of garbage lines of one carry skip BCD digit (g0..g35).
  localparam int unsigned BCD_GARBAGE = 36;

endpackage : rev_pkg
