// scbcla32_hetero: 32-bit heterogeneous section-carry based carry lookahead
// adder.
//
// Adds two 32-bit operands a and b and a carry input cin; sum is the 32-bit
// result and cout the carry out. From the least significant bit the adder is
//   bits  1: 0  2-bit ripple carry adder (two full adders)
//   bits 28: 2  nine 3-bit SCBCLA sections
//   bits 31:29  3-bit ripple carry adder (three full adders)
// Each SCBCLA section hands its lookahead carry straight to the next section,
// so the carry crosses a section in two gate levels; inside a section the sum
// bits ripple. The short RCA at the bottom is cheaper than a lookahead section
// where the carry has little distance to cover, and the RCA at the top only
// feeds the final sum bits and cout.
// This partition is the published one for the proposed (best figure-of-merit)
// variant, and the parameter defaults reproduce it. Exposing cin and cout as
// ports, and making the partition a set of parameters, are this design's choices.
// Purely combinational: no clock, no reset, no registers; the result is valid
// one adder delay after the operands change.
module scbcla32_hetero
  import scbcla_pkg::*;
#(
  parameter int unsigned LSB_RCA_BITS = LSB_RCA_BITS_DEF,
  parameter int unsigned SECTION_BITS = SECTION_BITS_DEF,
  parameter int unsigned NUM_SECTIONS = NUM_SECTIONS_DEF,
  parameter int unsigned MSB_RCA_BITS = MSB_RCA_BITS_DEF,
  localparam int unsigned W = adder_width(LSB_RCA_BITS, SECTION_BITS,
                                          NUM_SECTIONS, MSB_RCA_BITS)
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);

  localparam int unsigned SEC_LSB = LSB_RCA_BITS;
  localparam int unsigned MSB_LSB = LSB_RCA_BITS + SECTION_BITS * NUM_SECTIONS;

  // Every part of the partition needs at least one bit.
  if (LSB_RCA_BITS < 1 || SECTION_BITS < 1 || NUM_SECTIONS < 1 || MSB_RCA_BITS < 1) begin : g_bad_partition
    $error("scbcla32_hetero: every part of the partition must be at least 1 bit / 1 section");
  end

  // sc[k] is the carry into SCBCLA section k; sc[NUM_SECTIONS] enters the top RCA.
  logic [NUM_SECTIONS:0] sc;

  rca #(.N(LSB_RCA_BITS)) u_rca_lsb (
    .a  (a[LSB_RCA_BITS-1:0]),
    .b  (b[LSB_RCA_BITS-1:0]),
    .ci (cin),
    .sum(sum[LSB_RCA_BITS-1:0]),
    .co (sc[0])
  );

  for (genvar k = 0; k < NUM_SECTIONS; k++) begin : g_sec
    localparam int unsigned LO = SEC_LSB + k * SECTION_BITS;
    scbcla_section #(.M(SECTION_BITS)) u_sec (
      .a  (a[LO +: SECTION_BITS]),
      .b  (b[LO +: SECTION_BITS]),
      .c0 (sc[k]),
      .sum(sum[LO +: SECTION_BITS]),
      .cm (sc[k+1])
    );
  end

  rca #(.N(MSB_RCA_BITS)) u_rca_msb (
    .a  (a[MSB_LSB +: MSB_RCA_BITS]),
    .b  (b[MSB_LSB +: MSB_RCA_BITS]),
    .ci (sc[NUM_SECTIONS]),
    .sum(sum[MSB_LSB +: MSB_RCA_BITS]),
    .co (cout)
  );

endmodule
