// tb_bcd_multi_digit: adds 8-digit decimal numbers with a chain of eight
// one-digit adders, each digit's cout feeding the next digit's cin, the way
// carry skip blocks are cascaded. 3000 random operand pairs, plus the
// all-nines case where the carry must pass every digit, are compared with
// integer addition. Counts how many digits took the skip path.
module tb_bcd_multi_digit;
  import rev_pkg::*;

  localparam int unsigned D = 8;

  int checks = 0;
  int failures = 0;

  logic [4*D-1:0] xa, ya, sa;
  logic [D:0]     c;
  logic [D-1:0]   skip;

  for (genvar k = 0; k < D; k++) begin : g_dig
    logic [BCD_GARBAGE-1:0] g;
    ft_cs_bcd_adder u_dig (
      .x(xa[4*k +: 4]), .y(ya[4*k +: 4]), .cin(c[k]),
      .s(sa[4*k +: 4]), .cout(c[k+1]), .g(g)
    );
    assign skip[k] = u_dig.blk_p;
  end

  function automatic logic [4*D-1:0] to_bcd(input longint v);
    logic [4*D-1:0] r;
    for (int k = 0; k < D; k++) begin
      r[4*k +: 4] = 4'(v % 10);
      v = v / 10;
    end
    return r;
  endfunction

  function automatic longint from_bcd(input logic [4*D-1:0] b);
    longint v = 0;
    for (int k = D - 1; k >= 0; k--) v = v * 10 + longint'(b[4*k +: 4]);
    return v;
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stim
    longint a, b, sum, got, lim;
    int nskip;
    nskip = 0;
    lim = 100000000;
    for (int i = 0; i <= 3000; i++) begin
      if (i == 3000) begin
        a = lim - 1; b = 1;
      end else begin
        a = longint'($urandom) % lim;
        b = longint'($urandom) % lim;
      end
      xa = to_bcd(a); ya = to_bcd(b); c[0] = 1'($urandom);
      #1;
      sum = a + b + longint'(c[0]);
      got = from_bcd(sa) + (c[D] ? lim : 0);
      nskip += $countones(skip);
      checks++;
      if (got != sum) begin
        failures++;
        $display("FAIL %0d + %0d + %0d = %0d, got %0d", a, b, c[0], sum, got);
      end
    end
    $display("digits that took the skip path: %0d", nskip);
    checks++;
    if (nskip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_bcd_multi_digit
