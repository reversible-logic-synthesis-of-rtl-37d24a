// tb_ft_and4: exhaustive check of the block propagate AND4.
// all_p must be 1 only for p = 4'b1111, and since the three gates preserve
// parity with their constant-0 inputs and no fan-out, the parity of
// {all_p, g} must equal the parity of p.
module tb_ft_and4;

  int checks = 0;
  int failures = 0;

  logic [3:0] p;
  logic       all_p;
  logic [5:0] g;

  ft_and4 dut (.p(p), .all_p(all_p), .g(g));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    for (int i = 0; i < 16; i++) begin
      p = 4'(i);
      #1;
      checks++;
      if (all_p !== (i == 15)) begin
        failures++;
        $display("FAIL p=%4b all_p=%b", p, all_p);
      end
      checks++;
      if ((^{all_p, g}) !== (^p)) begin
        failures++;
        $display("FAIL parity p=%4b", p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_ft_and4
