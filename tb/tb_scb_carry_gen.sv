// tb_scb_carry_gen: exhaustive self-checking test of scb_carry_gen.
//
// For section sizes 3 (the default) and 2, drives every combination of
// operands a, b and carry input, derives p = a ^ b and g = a & b, and checks
// cm against the carry out of the integer sum a + b + c0. The 3-bit case is
// also compared with the published equation
// C3 = G2 + P2G1 + P2P1G0 + P2P1P0C0 written out term by term.
// Watchdog: 1000 cycles.
`timescale 1ns/100ps
module tb_scb_carry_gen;

  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic [2:0] p3, g3;
  logic [1:0] p2, g2;
  logic       c0, cm3, cm2;
  int checks = 0, failures = 0;

  scb_carry_gen             dut3 (.p(p3), .g(g3), .c0(c0), .cm(cm3));
  scb_carry_gen #(.M(2))    dut2 (.p(p2), .g(g2), .c0(c0), .cm(cm2));

  initial begin
    p3 = '0; g3 = '0; p2 = '0; g2 = '0; c0 = 1'b0;
    for (int v = 0; v < 128; v++) begin
      logic [2:0] a, b;
      logic       ci;
      logic [3:0] full;
      logic [2:0] full2;
      logic       eq3;
      {a, b, ci} = 7'(v);
      @(posedge clk);
      p3 = a ^ b; g3 = a & b;
      p2 = p3[1:0]; g2 = g3[1:0];
      c0 = ci;
      #4;
      full  = 4'(a) + 4'(b) + 4'(ci);
      full2 = 3'(a[1:0]) + 3'(b[1:0]) + 3'(ci);
      eq3   = g3[2] | (p3[2] & g3[1]) | (p3[2] & p3[1] & g3[0]) | (p3[2] & p3[1] & p3[0] & ci);
      checks++;
      if (cm3 !== full[3]) begin
        failures++;
        $display("FAIL M=3 a=%b b=%b c0=%b: cm=%b want %b", a, b, ci, cm3, full[3]);
      end
      checks++;
      if (cm3 !== eq3) begin
        failures++;
        $display("FAIL M=3 eq.(3) a=%b b=%b c0=%b: cm=%b want %b", a, b, ci, cm3, eq3);
      end
      checks++;
      if (cm2 !== full2[2]) begin
        failures++;
        $display("FAIL M=2 a=%b b=%b c0=%b: cm=%b want %b", a[1:0], b[1:0], ci, cm2, full2[2]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
