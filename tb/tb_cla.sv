// tb_cla - self-check of the carry lookahead adder at 32 bits (eight
// sub-CLAs, the paper's accurate CLA) and at 12 bits (three sub-CLAs, the
// accurate part of a 20-bit approximation).
//
// Drives directed corner cases and 1000 random operand pairs, one every
// 4 ns, and compares {cout, sum} with a + b + cin. Counts how often a carry
// crossed from one sub-CLA to the next, how often it crossed all of them
// and how often the adder overflowed; any of these never happening is a
// failure. Watchdog included.
`timescale 1ns/1ps
module tb_cla;

  localparam int W1 = 32;
  localparam int W2 = 12;

  logic [W1-1:0] a1, b1, s1;
  logic          ci1, co1;
  logic [W2-1:0] a2, b2, s2;
  logic          ci2, co2;

  int checks = 0;
  int failures = 0;
  int n_group_carry = 0;
  int n_full_chain = 0;
  int n_ovf = 0;

  cla #(.WIDTH(W1)) dut1 (.a(a1), .b(b1), .cin(ci1), .sum(s1), .cout(co1));
  cla #(.WIDTH(W2)) dut2 (.a(a2), .b(b2), .cin(ci2), .sum(s2), .cout(co2));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [W1-1:0] a, input logic [W1-1:0] b, input logic ci);
    logic [W1:0] exp1;
    logic [W2:0] exp2;
    logic [W1:0] carries;
    a1 = a; b1 = b; ci1 = ci;
    a2 = a[W2-1:0]; b2 = b[W2-1:0]; ci2 = ci;
    #1;
    exp1 = {1'b0, a} + {1'b0, b} + (W1+1)'(ci);
    exp2 = {1'b0, a2} + {1'b0, b2} + (W2+1)'(ci);
    checks += 2;
    if ({co1, s1} != exp1) begin
      failures++;
      $display("FAIL W=32 a=%h b=%h ci=%0d got %0d_%h exp %h", a, b, ci, co1, s1, exp1);
    end
    if ({co2, s2} != exp2) begin
      failures++;
      $display("FAIL W=12 a=%h b=%h ci=%0d got %0d_%h exp %h", a2, b2, ci, co2, s2, exp2);
    end
    // Carry into each bit position: a ^ b ^ sum.
    carries = {1'b0, a ^ b} ^ exp1;
    for (int j = 1; j < W1 / 4; j++) if (carries[4*j]) n_group_carry++;
    if ((a ^ b) == '1 && ci) n_full_chain++;
    if (co1) n_ovf++;
    #3;
  endtask

  initial begin
    apply('1, '0, 1'b1);                    // carry through all eight sub-CLAs
    apply(32'h0FFF_FFFF, 32'h0000_0001, 1'b0);
    apply('1, '1, 1'b1);
    apply('0, '0, 1'b0);
    apply(32'h8000_0000, 32'h8000_0000, 1'b0);
    for (int i = 0; i < 1000; i++) apply($urandom, $urandom, 1'($urandom));
    checks++;
    if (n_group_carry == 0 || n_full_chain == 0 || n_ovf == 0) begin
      failures++;
      $display("FAIL mechanism not exercised: group carries=%0d full chains=%0d overflows=%0d",
               n_group_carry, n_full_chain, n_ovf);
    end
    $display("sub-CLA carries=%0d full chains=%0d overflows=%0d", n_group_carry, n_full_chain, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
