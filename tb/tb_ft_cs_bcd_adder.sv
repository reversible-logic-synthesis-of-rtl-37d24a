// tb_ft_cs_bcd_adder: end-to-end check of one BCD digit at its default
// configuration (no parameters overridden).
// Every pair of digits 0..9 with carry in 0 and 1 (200 cases) is applied and
// {cout, s} is compared with the decimal sum x + y + cin split into a carry
// and a digit. The test also counts how often each mechanism of the digit is
// used and fails if one never is:
//   skip       - all four bits propagate, so the carry skip gate passes cin
//   skip_carry - the skip path delivers a carry of 1
//   ripple     - the ripple carry C4 is selected and is 1
//   corr_z3z2 / corr_z3z1 - the decimal carry is raised by an AND term
//   corr_c     - the decimal carry is raised by the binary carry
//   corr_both  - binary sum 14 or 15, where both AND terms would overlap
// Internal nets are observed by hierarchical reference for these counts only.
module tb_ft_cs_bcd_adder;
  import rev_pkg::*;

  int checks = 0;
  int failures = 0;

  logic [3:0]             x, y, s;
  logic                   cin, cout;
  logic [BCD_GARBAGE-1:0] g;

  ft_cs_bcd_adder dut (.x(x), .y(y), .cin(cin), .s(s), .cout(cout), .g(g));

  int n_skip = 0, n_skip_carry = 0, n_ripple = 0;
  int n_z3z2 = 0, n_z3z1 = 0, n_c = 0, n_both = 0;

  task automatic count(input string name, input int n);
    checks++;
    $display("mechanism %-12s used %0d times", name, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism %s never used", name);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    int total, bin;
    for (int ci = 0; ci < 2; ci++) begin
      for (int xi = 0; xi < 10; xi++) begin
        for (int yi = 0; yi < 10; yi++) begin
          x = 4'(xi); y = 4'(yi); cin = 1'(ci);
          #1;
          total = xi + yi + ci;
          checks++;
          if (cout !== (total >= 10) || int'(s) != total % 10) begin
            failures++;
            $display("FAIL %0d + %0d + %0d: got cout=%b s=%0d, expected %0d",
                     xi, yi, ci, cout, s, total);
          end
          checks++;
          if (dut.c_bin !== (total >= 16)) begin
            failures++;
            $display("FAIL binary carry of %0d + %0d + %0d", xi, yi, ci);
          end
          // Two garbage lines with a simple meaning: g14 is the skip gate's
          // pass-through of P (x ^ y all ones), g35 the carry out of the
          // correction row, i.e. (total mod 16) + 6 >= 16 when corrected.
          checks++;
          if (g[14] !== ((x ^ y) == 4'hF)) begin
            failures++;
            $display("FAIL g14 for %0d + %0d", xi, yi);
          end
          checks++;
          if (g[35] !== (total >= 10 && (total % 16) + 6 >= 16)) begin
            failures++;
            $display("FAIL g35 for %0d + %0d + %0d", xi, yi, ci);
          end
          bin = total;
          if (dut.blk_p) n_skip++;
          if (dut.blk_p && ci == 1) n_skip_carry++;
          if (!dut.blk_p && dut.c4) n_ripple++;
          if (bin >= 12 && bin <= 15) n_z3z2++;
          if (bin inside {10, 11, 14, 15}) n_z3z1++;
          if (bin >= 16) n_c++;
          if (bin == 14 || bin == 15) n_both++;
        end
      end
    end
    count("skip", n_skip);
    count("skip_carry", n_skip_carry);
    count("ripple", n_ripple);
    count("corr_z3z2", n_z3z2);
    count("corr_z3z1", n_z3z1);
    count("corr_c", n_c);
    count("corr_both", n_both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_ft_cs_bcd_adder
