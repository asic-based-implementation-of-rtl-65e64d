// scb_carry_gen: section-carry based carry lookahead generator.
//
// Produces only the carry out of an M-bit section, cm, from the section's
// propagate/generate signals and its carry input c0. Unlike a conventional
// lookahead generator it forms no intermediate carries. The logic is the
// unrolled carry recursion as one flat sum of products: one AND term per bit j
// (g[j] and every p above it), one term with all p and c0, and a single OR.
// For M = 3 this is
//   cm = g2 | p2 g1 | p2 p1 g0 | p2 p1 p0 c0
// exactly as published for the 3-bit generator. The same pattern for other M
// (e.g. 2) is this design's extension of it. The product terms are pairwise
// disjoint because g[j] and p[j] never hold together.
// Combinational, no clock.
module scb_carry_gen #(
  parameter int unsigned M = 3
) (
  input  logic [M-1:0] p,
  input  logic [M-1:0] g,
  input  logic         c0,
  output logic         cm
);

  // term[j], j < M: g[j] and all propagates above bit j.
  // term[M]      : c0 and all propagates of the section.
  logic [M:0] term;

  always_comb begin
    for (int j = 0; j < M; j++) begin
      term[j] = g[j];
      for (int k = j + 1; k < M; k++) term[j] = term[j] & p[k];
    end
    term[M] = c0;
    for (int k = 0; k < M; k++) term[M] = term[M] & p[k];
    cm = |term;
  end

endmodule
