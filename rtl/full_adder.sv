// full_adder - one-bit full adder, the cell cascaded by the ripple carry
// adder.
//
// sum  = a XOR b XOR cin
// cout = a AND b  OR  cin AND (a XOR b)
//
// Purely combinational, no clock. The ripple carry structure built from
// this cell follows the paper; the paper uses a library full-adder cell and
// gives only its function, so the Boolean form written here is this
// design's own (any correct full adder will do).
`timescale 1ns/1ps

module full_adder (
  input  logic a,     // augend bit A_i
  input  logic b,     // addend bit B_i
  input  logic cin,   // carry in C_i
  output logic sum,   // sum bit SUM_i
  output logic cout   // carry out C_(i+1)
);

  logic p;

  always_comb begin
    p    = a ^ b;
    sum  = p ^ cin;
    cout = (a & b) | (cin & p);
  end

endmodule
