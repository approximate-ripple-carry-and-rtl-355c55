// tb_full_adder - exhaustive self-check of the one-bit full adder.
//
// Applies all eight (a, b, cin) combinations, one every 4 ns, and compares
// {cout, sum} with the integer sum a + b + cin. The adder is
// combinational, so the result is checked 1 ns after the inputs change,
// within the same 4 ns slot. A watchdog ends the run with a failure if it
// does not finish in time.
`timescale 1ns/1ps
module tb_full_adder;

  logic a, b, cin, sum, cout;
  int   checks = 0;
  int   failures = 0;

  full_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin : watchdog
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({cout, sum} != 2'(int'(a) + int'(b) + int'(cin))) begin
        failures++;
        $display("FAIL a=%0d b=%0d cin=%0d -> cout=%0d sum=%0d", a, b, cin, cout, sum);
      end
      #3;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
