// scbcla_section: M-bit section-carry based carry lookahead adder (sub-SCBCLA).
//
// One section of the adder. The propagate-generate logic (pg_logic) feeds the
// section-carry generator (scb_carry_gen), which computes the section's carry
// out cm in two gate levels and hands it to the next section. In parallel the
// sum logic (scb_sum_logic) ripples c0 through the section's own full adders
// to form the sum bits. So carries travel between sections by lookahead and
// within a section by ripple. This structure follows the published section
// diagram; M defaults to 3, the section size of the proposed adder.
// Combinational: a, b, c0 in; sum, cm out.
module scbcla_section #(
  parameter int unsigned M = 3
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  input  logic         c0,
  output logic [M-1:0] sum,
  output logic         cm
);

  logic [M-1:0] p, g;

  pg_logic #(.M(M)) u_pg (
    .a(a),
    .b(b),
    .p(p),
    .g(g)
  );

  scb_carry_gen #(.M(M)) u_cgen (
    .p (p),
    .g (g),
    .c0(c0),
    .cm(cm)
  );

  scb_sum_logic #(.M(M)) u_sum (
    .a  (a),
    .b  (b),
    .c0 (c0),
    .sum(sum)
  );

endmodule
