// tb_full_adder: exhaustive self-checking test of full_adder.
//
// Applies all eight input combinations, one per 5 ns clock period, and
// compares s and co with the arithmetic sum a + b + ci worked out here.
// A watchdog ends the run with a failure if it has not finished in 100 cycles.
`timescale 1ns/100ps
module tb_full_adder;

  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic a, b, ci, s, co;
  int   checks = 0, failures = 0;

  full_adder dut (.a(a), .b(b), .ci(ci), .s(s), .co(co));

  initial begin
    a = 0; b = 0; ci = 0;
    for (int v = 0; v < 8; v++) begin
      @(posedge clk);
      {a, b, ci} = 3'(v);
      #4;
      begin
        logic [1:0] exp_v;
        exp_v = 2'(a) + 2'(b) + 2'(ci);
        checks++;
        if ({co, s} !== exp_v) begin
          failures++;
          $display("FAIL a=%0d b=%0d ci=%0d: got co=%0d s=%0d, want %0d", a, b, ci, co, s, exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
