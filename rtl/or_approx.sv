// or_approx - approximate lower part of the approximate adders.
//
// Each of the WIDTH sum bits is the 2-input OR of the matching augend and
// addend bits, SUM_i = A_i + B_i (Eq. 6): there is no carry at all, neither
// inside this part nor into the accurate part above it. Against a full
// adder each bit is right in four of the eight input combinations (the
// sum is wrong whenever a carry would have come in, except for A=B=1).
// Purely combinational, one OR gate deep.
//
// The paper chooses OR gates over XOR gates (Eq. 5, equally accurate but
// larger); this module follows that choice. WIDTH defaults to 4, the
// smallest approximation size the paper evaluates.
`timescale 1ns/1ps

module or_approx #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] a,     // augend LSBs A(K-1)..A0
  input  logic [WIDTH-1:0] b,     // addend LSBs B(K-1)..B0
  output logic [WIDTH-1:0] sum    // approximate SUM(K-1)..SUM0
);

  always_comb sum = a | b;

endmodule
