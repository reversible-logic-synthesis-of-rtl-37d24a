// tb_ftfa: exhaustive check of the fault tolerant full adder.
// Sum and carry are compared with integer addition a + b + cin. The garbage
// lines are compared with what the two-IG wiring gives: G1 = a & ~b,
// G2 = a ^ b, G3 = cin ? a : b. The test also checks parity
// (a^b^cin == sum^cout^G1^G2^G3) and that the eight 5-bit output patterns are
// all different, which is what makes the circuit reversible with its two
// constant inputs.
module tb_ftfa;

  int checks = 0;
  int failures = 0;

  logic       a, b, cin;
  logic       sum, cout;
  logic [2:0] g;

  ftfa dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout), .g(g));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at a=%b b=%b cin=%b: sum=%b cout=%b g=%b",
               what, a, b, cin, sum, cout, g);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    logic [31:0] seen;
    int          total;
    seen = '0;
    for (int i = 0; i < 8; i++) begin
      {a, b, cin} = 3'(i);
      #1;
      total = int'(a) + int'(b) + int'(cin);
      check({cout, sum} === 2'(total), "sum/carry");
      check(g[0] === (a & ~b), "G1");
      check(g[1] === (a ^ b), "G2 (propagate)");
      check(g[2] === (cin ? a : b), "G3");
      check((sum ^ cout ^ (^g)) === (a ^ b ^ cin), "parity");
      check(!seen[{sum, cout, g}], "distinct outputs");
      seen[{sum, cout, g}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_ftfa
