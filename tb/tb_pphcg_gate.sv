// tb_pphcg_gate: exhaustive check of the PPHCG gate.
// Reference: each output is the XOR of all four inputs with one input left
// out (P leaves out A, Q leaves out D, R leaves out C, S leaves out B).
// Also checks reversibility, parity preservation and the 3-input XOR use
// (D = 0, Q = A ^ B ^ C).
module tb_pphcg_gate;

  int checks = 0;
  int failures = 0;

  logic a, b, c, d;
  logic p, q, r, s;

  pphcg_gate dut (.a(a), .b(b), .c(c), .d(d), .p(p), .q(q), .r(r), .s(s));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at ABCD=%b%b%b%b: PQRS=%b%b%b%b", what, a, b, c, d, p, q, r, s);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    logic [15:0] seen;
    logic        all;
    seen = '0;
    for (int i = 0; i < 16; i++) begin
      {a, b, c, d} = 4'(i);
      #1;
      all = ^i[3:0];
      check(p === (all ^ a), "P");
      check(q === (all ^ d), "Q");
      check(r === (all ^ c), "R");
      check(s === (all ^ b), "S");
      check((p ^ q ^ r ^ s) === all, "parity");
      check(!seen[{p, q, r, s}], "reversible");
      seen[{p, q, r, s}] = 1'b1;
      if (!d) check(q === (a ^ b ^ c), "XOR3 use");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_pphcg_gate
