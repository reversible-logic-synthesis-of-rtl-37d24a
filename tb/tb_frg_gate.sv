// tb_frg_gate: exhaustive check of the Fredkin gate.
// The reference is the gate's behaviour as a controlled swap: A passes, and B
// and C are exchanged when A = 1. Also checks reversibility (8 distinct
// outputs), parity preservation and the two uses made of the gate in the
// adder: AND (C = 0 gives R = A & B) and 2:1 select (Q = A ? C : B).
module tb_frg_gate;

  int checks = 0;
  int failures = 0;

  logic a, b, c;
  logic p, q, r;

  frg_gate dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at ABC=%b%b%b: PQR=%b%b%b", what, a, b, c, p, q, r);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    logic [7:0] seen;
    logic [2:0] exp;
    seen = '0;
    for (int i = 0; i < 8; i++) begin
      {a, b, c} = 3'(i);
      #1;
      exp = a ? {a, c, b} : {a, b, c};
      check({p, q, r} === exp, "swap");
      check((p ^ q ^ r) === (a ^ b ^ c), "parity");
      check(!seen[{p, q, r}], "reversible");
      seen[{p, q, r}] = 1'b1;
      if (!c) check(r === (a & b), "AND use");
      check(q === (a ? c : b), "select use");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_frg_gate
