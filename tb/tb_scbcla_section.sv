// tb_scbcla_section: exhaustive self-checking test of scbcla_section.
//
// For section sizes 3 (the default) and 2, applies every operand pair and
// carry input and checks {cm, sum} against the integer sum a + b + c0.
// It also counts how often the section carry came from a generate term and
// how often c0 was propagated through the whole section, and fails if either
// never happened. Watchdog: 1000 cycles.
`timescale 1ns/100ps
module tb_scbcla_section;

  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic [2:0] a3, b3, s3;
  logic [1:0] s2;
  logic       c0, cm3, cm2;
  int checks = 0, failures = 0;
  int n_generated = 0, n_propagated = 0;

  scbcla_section          dut3 (.a(a3), .b(b3), .c0(c0), .sum(s3), .cm(cm3));
  scbcla_section #(.M(2)) dut2 (.a(a3[1:0]), .b(b3[1:0]), .c0(c0), .sum(s2), .cm(cm2));

  initial begin
    a3 = '0; b3 = '0; c0 = 1'b0;
    for (int v = 0; v < 128; v++) begin
      logic [3:0] full;
      logic [2:0] full2;
      @(posedge clk);
      {a3, b3, c0} = 7'(v);
      #4;
      full  = 4'(a3) + 4'(b3) + 4'(c0);
      full2 = 3'(a3[1:0]) + 3'(b3[1:0]) + 3'(c0);
      if ((a3 ^ b3) == 3'b111) begin
        if (c0) n_propagated++;
      end else if (full[3]) n_generated++;
      checks++;
      if ({cm3, s3} !== full) begin
        failures++;
        $display("FAIL M=3 a=%b b=%b c0=%b: cm,sum=%b want %b", a3, b3, c0, {cm3, s3}, full);
      end
      checks++;
      if ({cm2, s2} !== full2) begin
        failures++;
        $display("FAIL M=2 a=%b b=%b c0=%b: cm,sum=%b want %b", a3[1:0], b3[1:0], c0, {cm2, s2}, full2);
      end
    end
    $display("carry generated in section: %0d, carry propagated through section: %0d",
             n_generated, n_propagated);
    checks++;
    if (n_generated == 0 || n_propagated == 0) begin
      failures++;
      $display("FAIL a carry mechanism was never exercised");
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
