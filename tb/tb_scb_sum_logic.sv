// tb_scb_sum_logic: exhaustive self-checking test of scb_sum_logic.
//
// For section sizes 3 (the default) and 2, drives all operand pairs and both
// carry inputs and checks sum against the low M bits of the integer sum
// a + b + c0. Watchdog: 1000 cycles.
`timescale 1ns/100ps
module tb_scb_sum_logic;

  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic [2:0] a3, b3, s3;
  logic [1:0] s2;
  logic       c0;
  int checks = 0, failures = 0;

  scb_sum_logic          dut3 (.a(a3), .b(b3), .c0(c0), .sum(s3));
  scb_sum_logic #(.M(2)) dut2 (.a(a3[1:0]), .b(b3[1:0]), .c0(c0), .sum(s2));

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
      checks++;
      if (s3 !== full[2:0]) begin
        failures++;
        $display("FAIL M=3 a=%b b=%b c0=%b: sum=%b want %b", a3, b3, c0, s3, full[2:0]);
      end
      checks++;
      if (s2 !== full2[1:0]) begin
        failures++;
        $display("FAIL M=2 a=%b b=%b c0=%b: sum=%b want %b", a3[1:0], b3[1:0], c0, s2, full2[1:0]);
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
