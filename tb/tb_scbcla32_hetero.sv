// tb_scbcla32_hetero: end-to-end self-checking test of the 32-bit
// heterogeneous SCBCLA at its default partition (2-bit RCA, nine 3-bit
// sections, 3-bit RCA), with no parameter overrides.
//
// One operand pair is applied per 5 ns clock period (200 MHz) and the
// outputs are sampled 4 ns later, inside the same period, so every check
// also confirms that the combinational result is ready within one cycle.
// Vectors: directed corner cases (zero, all ones, carries that run the
// whole width), then 2000 pseudo-random pairs from $urandom, part of them
// biased so that whole sections propagate. The expected {cout, sum} is the
// 33-bit integer sum a + b + cin.
// Carry mechanisms are counted from the operands themselves (the carries
// into each bit are (a + b + cin) ^ a ^ b): a section carry created by a
// generate term, an incoming carry passed through all three bits of a
// section (the lookahead path), carry out of the low RCA, carry out of the
// whole adder, and a used carry input. Each must occur at least once.
// Watchdog: 5000 cycles.
`timescale 1ns/100ps
module tb_scbcla32_hetero;

  import scbcla_pkg::*;

  localparam int unsigned W = WIDTH_DEF;

  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic [W-1:0] a, b, sum;
  logic         cin, cout;
  int checks = 0, failures = 0;
  int n_sec_generated = 0, n_sec_propagated = 0, n_lsb_carry = 0;
  int n_cout = 0, n_cin = 0, n_vectors = 0;

  scbcla32_hetero dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic apply(input logic [W-1:0] va, input logic [W-1:0] vb, input logic vc);
    logic [W:0] full;
    logic [W:0] carries;   // carries[i] = carry into bit i
    @(posedge clk);
    a = va; b = vb; cin = vc;
    #4;
    n_vectors++;
    full    = {1'b0, va} + {1'b0, vb} + {{W{1'b0}}, vc};
    carries = full ^ {1'b0, va} ^ {1'b0, vb};
    checks++;
    if ({cout, sum} !== full) begin
      failures++;
      $display("FAIL a=%h b=%h cin=%b: got %b_%h want %b_%h", va, vb, vc, cout, sum, full[W], full[W-1:0]);
    end
    if (vc) n_cin++;
    if (full[W]) n_cout++;
    if (carries[LSB_RCA_BITS_DEF]) n_lsb_carry++;
    for (int k = 0; k < int'(NUM_SECTIONS_DEF); k++) begin
      int lo;
      logic [SECTION_BITS_DEF-1:0] p;
      lo = LSB_RCA_BITS_DEF + k * SECTION_BITS_DEF;
      p  = va[lo +: SECTION_BITS_DEF] ^ vb[lo +: SECTION_BITS_DEF];
      if (&p) begin
        if (carries[lo]) n_sec_propagated++;
      end else if (carries[lo + SECTION_BITS_DEF]) begin
        n_sec_generated++;
      end
    end
  endtask

  initial begin
    a = '0; b = '0; cin = 1'b0;
    // Directed corner cases.
    apply('0, '0, 1'b0);
    apply('0, '0, 1'b1);
    apply('1, '0, 1'b1);          // carry ripples/looks ahead across all 32 bits
    apply('0, '1, 1'b1);
    apply('1, '1, 1'b1);
    apply('1, '1, 1'b0);
    apply(32'h8000_0000, 32'h8000_0000, 1'b0);
    apply(32'h0000_0003, 32'h0000_0001, 1'b0);   // carry out of the low RCA
    apply(32'h1FFF_FFFC, 32'h0000_0004, 1'b0);   // generate at bit 2, propagate to bit 29
    apply(32'h5555_5555, 32'hAAAA_AAAA, 1'b1);
    for (int k = 0; k < int'(NUM_SECTIONS_DEF); k++) begin
      int lo;
      logic [W-1:0] x;
      lo = LSB_RCA_BITS_DEF + k * SECTION_BITS_DEF;
      x  = W'(1) << lo;
      apply(x, x, 1'b0);            // generate in section k's lowest bit
      apply(~(x - 1), x, 1'b0);     // carry from section k through everything above
    end
    // Random vectors: plain, section-propagate biased, and inverted operands.
    for (int i = 0; i < 2000; i++) begin
      logic [W-1:0] ra, rb;
      logic         rc;
      ra = $urandom;
      rc = 1'($urandom);
      case (i % 4)
        0, 1: rb = $urandom;
        2:    rb = ~ra ^ ($urandom & $urandom & $urandom);
        default: rb = ~ra;
      endcase
      apply(ra, rb, rc);
    end

    $display("vectors=%0d section carries generated=%0d propagated through a section=%0d",
             n_vectors, n_sec_generated, n_sec_propagated);
    $display("low RCA carry out=%0d adder carry out=%0d carry input used=%0d",
             n_lsb_carry, n_cout, n_cin);
    checks++;
    if (n_sec_generated == 0) begin failures++; $display("FAIL no section carry generated"); end
    checks++;
    if (n_sec_propagated == 0) begin failures++; $display("FAIL no carry propagated through a section"); end
    checks++;
    if (n_lsb_carry == 0) begin failures++; $display("FAIL no carry out of the low RCA"); end
    checks++;
    if (n_cout == 0) begin failures++; $display("FAIL no adder carry out"); end
    checks++;
    if (n_cin == 0) begin failures++; $display("FAIL carry input never set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
