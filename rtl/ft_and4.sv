// ft_and4: block propagate signal of a 4-bit carry skip block.
//
// all_p = p[0] & p[1] & p[2] & p[3], built from three Fredkin gates in a
// chain, each used as an AND gate by tying its C input to 0 (R = A & B).
// Each gate's P and Q outputs are garbage, six lines in all (g8..g13 of the
// published digit schematic). The chain order p0&p1, then &p2, then &p3, and
// the choice of A as the new propagate bit, are this design's.
//
// Interface: p (4 bit propagates) in; all_p and g = {g13..g8} out.
// Timing: combinational, three gate levels.
module ft_and4 (
  input  logic [3:0] p,
  output logic       all_p,
  output logic [5:0] g      // g[2k] = P, g[2k+1] = Q of gate k
);

  logic [3:0] prod;

  assign prod[0] = p[0];

  for (genvar k = 0; k < 3; k++) begin : g_and
    frg_gate u_frg (
      .a(p[k+1]), .b(prod[k]), .c(1'b0),
      .p(g[2*k]), .q(g[2*k+1]), .r(prod[k+1])
    );
  end

  assign all_p = prod[3];

endmodule : ft_and4
