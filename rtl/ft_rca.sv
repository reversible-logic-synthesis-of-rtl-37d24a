// ft_rca: N-bit fault tolerant ripple carry adder.
//
// N ftfa cells are chained carry to carry, bit 0 taking cin. This is 2N IG
// gates, 2N constant-0 inputs and 3N garbage outputs, with a delay of two
// gate levels per bit (2N unit delays for the carry chain).
//   sum_i    = x_i ^ y_i ^ c_i
//   c_(i+1)  = (x_i ^ y_i) & c_i ^ x_i & y_i
// The per-bit propagate x_i ^ y_i is the middle garbage line G2 of each
// cell, g[3i+1]; a carry skip stage takes it from there.
//
// Interface: x, y (N bits), cin in; sum (N bits), cout and g (3N bits,
// cell i at g[3i+2:3i] = {G3, G2, G1}) out.
// The structure is the published one; the garbage numbering per cell is
// this design's.
// Timing: combinational.
module ft_rca #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]   x,
  input  logic [N-1:0]   y,
  input  logic           cin,
  output logic [N-1:0]   sum,
  output logic           cout,
  output logic [3*N-1:0] g
);

  logic [N:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < N; i++) begin : g_bit
    ftfa u_fa (
      .a   (x[i]),
      .b   (y[i]),
      .cin (c[i]),
      .sum (sum[i]),
      .cout(c[i+1]),
      .g   (g[3*i +: 3])
    );
  end

  assign cout = c[N];

endmodule : ft_rca
