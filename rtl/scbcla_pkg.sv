// scbcla_pkg: shared constants of the 32-bit heterogeneous section-carry based
// carry lookahead adder (SCBCLA).
//
// The default partition is the one of the proposed design: counting from the
// least significant bit, a 2-bit ripple carry adder (RCA), nine 3-bit SCBCLA
// sections and a 3-bit RCA, 2 + 9*3 + 3 = 32 bits. These numbers follow the
// published block diagram of that design; only the package itself and the
// helper function are this implementation's own.
package scbcla_pkg;

  localparam int unsigned LSB_RCA_BITS_DEF = 2;
  localparam int unsigned SECTION_BITS_DEF = 3;
  localparam int unsigned NUM_SECTIONS_DEF = 9;
  localparam int unsigned MSB_RCA_BITS_DEF = 3;

  // Total operand width of an adder with the given partition.
  function automatic int unsigned adder_width(int unsigned lsb_bits,
                                              int unsigned sec_bits,
                                              int unsigned n_sec,
                                              int unsigned msb_bits);
    return lsb_bits + sec_bits * n_sec + msb_bits;
  endfunction

  localparam int unsigned WIDTH_DEF =
      adder_width(LSB_RCA_BITS_DEF, SECTION_BITS_DEF, NUM_SECTIONS_DEF, MSB_RCA_BITS_DEF);

endpackage
