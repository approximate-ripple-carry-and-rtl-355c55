// cla4 - 4-bit accurate carry lookahead sub-adder (sub-CLA).
//
// Three stages, all combinational:
//   propagate-generate logic: P_i = A_i XOR B_i, G_i = A_i AND B_i (Eqs. 1, 2)
//   4-bit carry lookahead generator (clg4): C1..C4 from P, G and C0 (Eq. 3)
//   sum logic: SUM_i = P_i XOR C_i (Eq. 4)
// C4 is the lookahead carry handed to the next sub-CLA. The structure
// follows the paper exactly; nothing here is this design's own choice.
`timescale 1ns/1ps

module cla4 (
  input  logic [3:0] a,     // augend nibble A3..A0
  input  logic [3:0] b,     // addend nibble B3..B0
  input  logic       cin,   // carry input C0
  output logic [3:0] sum,   // SUM3..SUM0
  output logic       cout   // lookahead carry output C4
);

  logic [3:0] p;
  logic [3:0] g;
  logic [4:1] c_la;
  logic [3:0] c;      // carry into each bit: C3..C0

  // Propagate-generate logic.
  always_comb begin
    p = a ^ b;
    g = a & b;
  end

  clg4 u_clg (
    .p (p),
    .g (g),
    .c0(cin),
    .c (c_la)
  );

  // Sum logic.
  always_comb begin
    c    = {c_la[3:1], cin};
    sum  = p ^ c;
    cout = c_la[4];
  end

endmodule
