// scb_sum_logic: sum logic of an M-bit section-carry based section.
//
// The sum bits of a section do not use lookahead carries. The carry c0 ripples
// through full adders at bits 0 .. M-2; the most significant bit is a plain
// 3-input XOR of a[M-1], b[M-1] and the rippled carry, since its carry out is
// not needed: the section's carry out comes from the lookahead generator
// (scb_carry_gen) instead. Both points follow the published section diagram.
// Combinational; the slowest path is c0 through M-1 full-adder carries.
module scb_sum_logic #(
  parameter int unsigned M = 3
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  input  logic         c0,
  output logic [M-1:0] sum
);

  // c[i] is the carry into bit i.
  logic [M-1:0] c;
  assign c[0] = c0;

  for (genvar i = 0; i < M - 1; i++) begin : g_fa
    full_adder u_fa (
      .a (a[i]),
      .b (b[i]),
      .ci(c[i]),
      .s (sum[i]),
      .co(c[i+1])
    );
  end

  // Most significant bit: 3-input XOR, no carry out.
  assign sum[M-1] = a[M-1] ^ b[M-1] ^ c[M-1];

endmodule
