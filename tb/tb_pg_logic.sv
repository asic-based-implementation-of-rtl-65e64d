// tb_pg_logic: exhaustive self-checking test of pg_logic at M = 3.
//
// Walks all 64 operand pairs, one per 5 ns period, and checks every bit of p
// against a[i] != b[i] and of g against a[i] == b[i] == 1, evaluated bit by
// bit here. Watchdog: 1000 cycles.
`timescale 1ns/100ps
module tb_pg_logic;

  localparam int unsigned M = 3;

  logic clk = 1'b0;
  always #2.5 clk = ~clk;

  logic [M-1:0] a, b, p, g;
  int checks = 0, failures = 0;

  pg_logic #(.M(M)) dut (.a(a), .b(b), .p(p), .g(g));

  initial begin
    a = '0; b = '0;
    for (int va = 0; va < (1 << M); va++) begin
      for (int vb = 0; vb < (1 << M); vb++) begin
        @(posedge clk);
        a = M'(va); b = M'(vb);
        #4;
        for (int i = 0; i < M; i++) begin
          logic ep, eg;
          ep = (a[i] != b[i]);
          eg = (a[i] == 1'b1) && (b[i] == 1'b1);
          checks++;
          if (p[i] !== ep || g[i] !== eg) begin
            failures++;
            $display("FAIL a=%b b=%b bit %0d: p=%b g=%b want p=%b g=%b", a, b, i, p[i], g[i], ep, eg);
          end
        end
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
