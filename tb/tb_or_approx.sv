// tb_or_approx - self-check of the OR-gate approximate adder part.
//
// First it walks the eight rows of the accurate-versus-approximate sum
// table (A_i, B_i, C_i): the OR output must match the table's column for
// Eq. (6), and exactly four of the eight rows must differ from the accurate
// sum A_i XOR B_i XOR C_i. Then it applies 500 random operand pairs to a
// 20-bit instance (the largest approximation size evaluated) and compares
// every bit with a | b. Combinational, one vector per 4 ns. Watchdog
// included.
`timescale 1ns/1ps
module tb_or_approx;

  localparam int W = 20;

  logic [0:0]   a1, b1, s1;
  logic [W-1:0] a2, b2, s2;

  int checks = 0;
  int failures = 0;

  // Approximate-sum column for Eq. (6), rows ordered by {A_i, B_i, C_i}.
  localparam logic [7:0] TABLE_EQ6 = 8'b1111_1100;  // bit r = row r

  or_approx #(.WIDTH(1)) dut1 (.a(a1), .b(b1), .sum(s1));
  or_approx #(.WIDTH(W)) dut2 (.a(a2), .b(b2), .sum(s2));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int incorrect = 0;
    for (int r = 0; r < 8; r++) begin
      automatic logic ai, bi, ci;
      {ai, bi, ci} = 3'(r);
      a1 = ai; b1 = bi;
      #1;
      checks++;
      if (s1[0] != TABLE_EQ6[r]) begin
        failures++;
        $display("FAIL row %0d: OR sum %0d, table %0d", r, s1[0], TABLE_EQ6[r]);
      end
      if (s1[0] != (ai ^ bi ^ ci)) incorrect++;
      #3;
    end
    checks++;
    if (incorrect != 4) begin
      failures++;
      $display("FAIL %0d incorrect rows, table has 4", incorrect);
    end
    for (int i = 0; i < 500; i++) begin
      a2 = W'($urandom);
      b2 = W'($urandom);
      #1;
      checks++;
      if (s2 != (a2 | b2)) begin
        failures++;
        $display("FAIL a=%h b=%h sum=%h", a2, b2, s2);
      end
      #3;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
