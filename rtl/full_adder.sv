// full_adder: one-bit full adder.
//
// Adds the operand bits a and b and the carry input ci; s is the sum bit and
// co the carry output. Purely combinational, no clock.
// The carry is written in the generate/propagate form the adder family uses,
// co = g | p & ci with g = a & b and p = a ^ b, and the sum as a 3-input XOR.
// The function is the standard one; in a standard-cell flow this maps onto the
// library's full-adder complex cell. The gate-level form here is this design's
// own choice.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);

  logic p, g;

  always_comb begin
    p  = a ^ b;
    g  = a & b;
    s  = p ^ ci;
    co = g | (p & ci);
  end

endmodule
