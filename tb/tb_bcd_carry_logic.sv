// tb_bcd_carry_logic: checks the decimal carry logic in both modes.
// Inputs are the binary carry c and sum Z of a one-digit add, over every pair
// that two BCD digits and a carry can produce (binary sum 0..19). The
// reference is "binary sum > 9".
//   default (CORR_EXCLUSIVE): cout must equal (sum > 9) everywhere.
//   CORR_PAPER: cout must equal c ^ Z3&Z2 ^ Z3&Z1, which equals (sum > 9)
//     except at sums 14 and 15; the test checks that it differs exactly
//     there.
module tb_bcd_carry_logic;
  import rev_pkg::*;

  int checks = 0;
  int failures = 0;

  logic       c;
  logic [3:0] z;
  logic       cout_x, cout_p;
  logic [6:0] g_x, g_p;

  bcd_carry_logic dut_x (.c(c), .z(z[3:1]), .cout(cout_x), .g(g_x));
  bcd_carry_logic #(.MODE(CORR_PAPER)) dut_p (.c(c), .z(z[3:1]), .cout(cout_p), .g(g_p));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at c=%b z=%4b: cout_x=%b cout_p=%b", what, c, z, cout_x, cout_p);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    int  paper_misses;
    bit  need;
    paper_misses = 0;
    for (int sum = 0; sum <= 19; sum++) begin
      {c, z} = 5'(sum);
      #1;
      need = (sum > 9);
      check(cout_x === need, "exclusive mode cout");
      check(cout_p === (c ^ (z[3] & z[2]) ^ (z[3] & z[1])), "paper mode netlist");
      if (cout_p !== need) begin
        paper_misses++;
        check(sum == 14 || sum == 15, "paper mode miss only at 14/15");
      end
    end
    check(paper_misses == 2, "paper mode misses exactly two sums");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_bcd_carry_logic
