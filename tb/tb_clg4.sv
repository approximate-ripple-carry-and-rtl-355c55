// tb_clg4 - exhaustive self-check of the 4-bit carry lookahead generator.
//
// Applies all 512 combinations of P3..P0, G3..G0 and C0 and compares
// C1..C4 with the serial recurrence C(i+1) = G(i) OR (P(i) AND C(i)),
// which the lookahead equations expand. Combinational: each result is
// checked 1 ns after the inputs change. Watchdog included.
`timescale 1ns/1ps
module tb_clg4;

  logic [3:0] p, g;
  logic       c0;
  logic [4:1] c;

  int checks = 0;
  int failures = 0;

  clg4 dut (.p(p), .g(g), .c0(c0), .c(c));

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [4:0] ref_c;
    for (int v = 0; v < 512; v++) begin
      {p, g, c0} = 9'(v);
      #1;
      ref_c[0] = c0;
      for (int i = 0; i < 4; i++) ref_c[i+1] = g[i] | (p[i] & ref_c[i]);
      checks++;
      if (c != ref_c[4:1]) begin
        failures++;
        $display("FAIL p=%b g=%b c0=%b -> c=%b exp %b", p, g, c0, c, ref_c[4:1]);
      end
      #3;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
