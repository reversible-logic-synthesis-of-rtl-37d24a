// tb_ig_gate: exhaustive check of the IG gate.
// All 16 input patterns are applied. Each output pattern is compared with the
// gate's published truth table, held below as a constant (not derived from
// the equations). The test also checks that the 16 outputs are all different
// (reversibility) and that output parity equals input parity. Finally it
// checks the three published uses of the gate as a universal element:
//   A = 1          : Q = ~B, R = B ^ C          (inverter and XOR)
//   C = 0          : Q = A ^ B, R = A & B       (XOR and AND)
//   a second gate fed (A^B, 1, A&B, x) gives P = A ^ B, Q = ~(A ^ B) and
//   R = A | B                                   (XOR, XNOR and OR)
module tb_ig_gate;

  int checks = 0;
  int failures = 0;

  logic a, b, c, d;
  logic p, q, r, s;

  ig_gate dut (.a(a), .b(b), .c(c), .d(d), .p(p), .q(q), .r(r), .s(s));

  // Truth table PQRS indexed by ABCD.
  localparam logic [3:0] TABLE [16] = '{
    4'b0000, 4'b0001, 4'b0010, 4'b0011, 4'b0100, 4'b0101, 4'b0110, 4'b0111,
    4'b1101, 4'b1100, 4'b1111, 4'b1110, 4'b1010, 4'b1011, 4'b1000, 4'b1001
  };

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    logic [15:0] seen;
    seen = '0;
    for (int i = 0; i < 16; i++) begin
      {a, b, c, d} = 4'(i);
      #1;
      checks++;
      if ({p, q, r, s} !== TABLE[i]) begin
        failures++;
        $display("FAIL ABCD=%4b PQRS=%4b expected %4b", 4'(i), {p, q, r, s}, TABLE[i]);
      end
      checks++;
      if ((p ^ q ^ r ^ s) !== (a ^ b ^ c ^ d)) begin
        failures++;
        $display("FAIL parity ABCD=%4b", 4'(i));
      end
      checks++;
      if (seen[{p, q, r, s}]) begin
        failures++;
        $display("FAIL output %4b repeated", {p, q, r, s});
      end
      seen[{p, q, r, s}] = 1'b1;
    end
    // Universality configurations, one input pair (u, v) at a time.
    for (int i = 0; i < 8; i++) begin
      logic u, v, w, x_ab, a_b;
      {u, v, w} = 3'(i);
      {a, b, c, d} = {1'b1, u, v, w};
      #1;
      checks++;
      if (q !== ~u || r !== (u ^ v)) failures++;
      {a, b, c, d} = {u, v, 1'b0, w};
      #1;
      checks++;
      if (q !== (u ^ v) || r !== (u & v)) failures++;
      x_ab = q;
      a_b  = r;
      {a, b, c, d} = {x_ab, 1'b1, a_b, w};
      #1;
      checks++;
      if (p !== (u ^ v) || q !== ~(u ^ v) || r !== (u | v)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_ig_gate
