// rca: N-bit ripple carry adder.
//
// A chain of N full adders; the carry runs from ci through every bit to co.
// The heterogeneous adder places such chains at its two ends: a 2-bit one at
// the least significant end and a 3-bit one at the most significant end.
// Grouping the chained full adders into one module is this design's choice.
// Combinational; delay grows linearly with N.
module rca #(
  parameter int unsigned N = 2
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic         ci,
  output logic [N-1:0] sum,
  output logic         co
);

  // c[i] is the carry into bit i, c[N] the carry out.
  logic [N:0] c;
  assign c[0] = ci;

  for (genvar i = 0; i < N; i++) begin : g_fa
    full_adder u_fa (
      .a (a[i]),
      .b (b[i]),
      .ci(c[i]),
      .s (sum[i]),
      .co(c[i+1])
    );
  end

  assign co = c[N];

endmodule
