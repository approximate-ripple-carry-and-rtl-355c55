// tb_cla4 - exhaustive self-check of the 4-bit carry lookahead sub-adder.
//
// Applies all 512 combinations of the two nibbles and the carry input and
// compares {cout, sum} with a + b + cin. Combinational: checked 1 ns after
// the inputs change, one vector per 4 ns. Watchdog included.
`timescale 1ns/1ps
module tb_cla4;

  logic [3:0] a, b, sum;
  logic       cin, cout;

  int checks = 0;
  int failures = 0;

  cla4 dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      {a, b, cin} = 9'(v);
      #1;
      checks++;
      if ({cout, sum} != 5'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%h b=%h cin=%b -> %b_%h", a, b, cin, cout, sum);
      end
      #3;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
