// tb_ft_rca: checks the ripple carry adder at two widths.
// The 4-bit adder (the default width) is tested on all 512 input
// combinations and a 12-bit adder on 2000 random ones. For each, {cout, sum}
// must equal x + y + cin, each cell's middle garbage line must equal x_i ^ y_i, and the
// parity of all outputs (sum, cout, garbage) must equal the parity of x, y and
// cin, since every gate preserves parity and there is no fan-out.
module tb_ft_rca;

  int checks = 0;
  int failures = 0;

  localparam int unsigned NW = 12;

  logic [3:0]    x4, y4, s4;
  logic          ci4, co4;
  logic [11:0]   g4;

  logic [NW-1:0]   xw, yw, sw;
  logic            ciw, cow;
  logic [3*NW-1:0] gw;

  ft_rca dut4 (.x(x4), .y(y4), .cin(ci4), .sum(s4), .cout(co4), .g(g4));
  ft_rca #(.N(NW)) dutw (.x(xw), .y(yw), .cin(ciw), .sum(sw), .cout(cow), .g(gw));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) failures++;
    if (!ok) $display("FAIL %s", what);
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    logic [NW:0] expw;
    xw = '0; yw = '0; ciw = 1'b0;
    for (int i = 0; i < 512; i++) begin
      {ci4, x4, y4} = 9'(i);
      #1;
      check({co4, s4} === 5'(int'(x4) + int'(y4) + int'(ci4)), $sformatf("4-bit sum %0d+%0d+%0d", x4, y4, ci4));
      for (int k = 0; k < 4; k++) check(g4[3*k+1] === (x4[k] ^ y4[k]), "4-bit G2 propagate line");
      check((^{s4, co4, g4}) === (^{x4, y4, ci4}), "4-bit parity");
    end
    for (int i = 0; i < 2000; i++) begin
      xw = NW'($urandom);
      yw = NW'($urandom);
      ciw = 1'($urandom);
      #1;
      expw = (NW+1)'(xw) + (NW+1)'(yw) + (NW+1)'(ciw);
      check({cow, sw} === expw, $sformatf("%0d-bit sum %0d+%0d+%0d", NW, xw, yw, ciw));
      for (int k = 0; k < NW; k++) check(gw[3*k+1] === (xw[k] ^ yw[k]), "wide G2 propagate line");
      check((^{sw, cow, gw}) === (^{xw, yw, ciw}), "wide parity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_ft_rca
