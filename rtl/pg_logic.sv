// pg_logic: propagate-generate logic of an M-bit adder section.
//
// For every bit i of the section it forms the generate signal g[i] = a[i] & b[i]
// (an AND gate) and the propagate signal p[i] = a[i] ^ b[i] (an XOR gate).
// Generate and propagate are mutually exclusive: a bit either creates a carry
// or passes the incoming one on. Combinational; M defaults to 3, the section
// size of the proposed adder. Follows the published equations directly.
module pg_logic #(
  parameter int unsigned M = 3
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic [M-1:0] p,
  output logic [M-1:0] g
);

  always_comb begin
    p = a ^ b;
    g = a & b;
  end

endmodule
