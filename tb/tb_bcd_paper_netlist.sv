// tb_bcd_paper_netlist: runs the digit built as the published schematic draws
// its decimal carry logic (MODE = CORR_PAPER: AND terms Z3&Z2 and Z3&Z1
// combined by XOR) over all 200 digit pairs with carry in. It checks that the
// result is the correct BCD sum for every binary digit sum except 14 and 15,
// and that at 14 and 15 the digit comes out uncorrected (cout = 0, s = the
// binary sum), which is what the XOR of two overlapping terms gives.
module tb_bcd_paper_netlist;
  import rev_pkg::*;

  int checks = 0;
  int failures = 0;
  int n_wrong = 0;   // digit pairs whose binary sum is 14 or 15

  logic [3:0]             x, y, s;
  logic                   cin, cout;
  logic [BCD_GARBAGE-1:0] g;

  ft_cs_bcd_adder #(.MODE(CORR_PAPER)) dut (
    .x(x), .y(y), .cin(cin), .s(s), .cout(cout), .g(g)
  );

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    int total;
    for (int ci = 0; ci < 2; ci++) begin
      for (int xi = 0; xi < 10; xi++) begin
        for (int yi = 0; yi < 10; yi++) begin
          x = 4'(xi); y = 4'(yi); cin = 1'(ci);
          #1;
          total = xi + yi + ci;
          checks++;
          if (total == 14 || total == 15) begin
            n_wrong++;
            if (cout !== 1'b0 || int'(s) != total) begin
              failures++;
              $display("FAIL %0d + %0d + %0d: cout=%b s=%0d", xi, yi, ci, cout, s);
            end
          end else if (cout !== (total >= 10) || int'(s) != total % 10) begin
            failures++;
            $display("FAIL %0d + %0d + %0d: got cout=%b s=%0d", xi, yi, ci, cout, s);
          end
        end
      end
    end
    $display("paper netlist: %0d of 200 digit pairs give binary sum 14 or 15", n_wrong);
    // 11 cases sum to 14 and 9 to 15 (counted by hand from the digit ranges).
    checks++;
    if (n_wrong != 20) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_bcd_paper_netlist
