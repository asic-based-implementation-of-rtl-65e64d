// tb_rca: exhaustive self-checking test of rca.
//
// Checks the default 2-bit adder and a 3-bit instance (the two sizes the
// heterogeneous adder uses) over all operand pairs and carry inputs against
// the integer sum a + b + ci. Watchdog: 1000 cycles.
`timescale 1ns/100ps
module tb_rca;

  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic [2:0] a, b, s3;
  logic [1:0] s2;
  logic       ci, co3, co2;
  int checks = 0, failures = 0;

  rca          dut2 (.a(a[1:0]), .b(b[1:0]), .ci(ci), .sum(s2), .co(co2));
  rca #(.N(3)) dut3 (.a(a), .b(b), .ci(ci), .sum(s3), .co(co3));

  initial begin
    a = '0; b = '0; ci = 1'b0;
    for (int v = 0; v < 128; v++) begin
      logic [3:0] full;
      logic [2:0] full2;
      @(posedge clk);
      {a, b, ci} = 7'(v);
      #4;
      full  = 4'(a) + 4'(b) + 4'(ci);
      full2 = 3'(a[1:0]) + 3'(b[1:0]) + 3'(ci);
      checks++;
      if ({co3, s3} !== full) begin
        failures++;
        $display("FAIL N=3 a=%b b=%b ci=%b: got %b want %b", a, b, ci, {co3, s3}, full);
      end
      checks++;
      if ({co2, s2} !== full2) begin
        failures++;
        $display("FAIL N=2 a=%b b=%b ci=%b: got %b want %b", a[1:0], b[1:0], ci, {co2, s2}, full2);
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
