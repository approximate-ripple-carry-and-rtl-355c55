// rca - WIDTH-bit accurate ripple carry adder.
//
// A cascade of WIDTH full adders FA1..FA(WIDTH): FA1 adds the least
// significant bits with the carry input, and each full adder hands its
// carry to the next, more significant one. The carry out of the last full
// adder is the adder's carry output (overflow). Purely combinational; the
// worst-case delay is WIDTH full-adder delays, from cin or bit 0 to cout.
//
// Follows the paper's 32-bit accurate RCA (32 full adders) and the
// accurate parts of its approximate RCAs (32-K full adders). WIDTH
// defaults to 32, the paper's accurate RCA.
`timescale 1ns/1ps

module rca #(
  parameter int unsigned WIDTH = 32
) (
  input  logic [WIDTH-1:0] a,     // augend
  input  logic [WIDTH-1:0] b,     // addend
  input  logic             cin,   // carry input (tied to 0 by the users)
  output logic [WIDTH-1:0] sum,   // sum
  output logic             cout   // carry output / overflow
);

  // c[i] is the carry into bit i; c[WIDTH] is the carry output.
  logic [WIDTH:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < WIDTH; i++) begin : g_fa
    full_adder u_fa (
      .a   (a[i]),
      .b   (b[i]),
      .cin (c[i]),
      .sum (sum[i]),
      .cout(c[i+1])
    );
  end

  assign cout = c[WIDTH];

endmodule
