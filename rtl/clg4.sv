// clg4 - delay-optimized 4-bit carry lookahead generator.
//
// From the propagate signals P3..P0, the generate signals G3..G0 and the
// carry input C0 it forms the four lookahead carries C1..C4 of Eq. (3):
//   C1 = G0 + P0.C0
//   C2 = (G1 + P1.G0) + P1.P0.C0
//   C3 = (G2 + P2.G1 + P2.P1.G0) + P2.P1.P0.C0
//   C4 = (G3 + P3.G2 + P3.P2.G1 + P3.P2.P1.G0) + P3.P2.P1.P0.C0
// Each carry is written as a group term that does not depend on C0, plus
// the product of the group propagate with C0. That last step is the single
// AND-OR (AO21) stage the paper names as the reason the generator is delay
// optimized: C0 reaches every carry through one complex gate, so the
// C0-to-C4 path, which is what chains sub-CLAs together, is one gate deep.
// Purely combinational.
//
// The equations and the grouping follow the paper; writing them as
// expressions, not as individual gates, is this design's choice.
`timescale 1ns/1ps

module clg4 (
  input  logic [3:0] p,     // propagate P3..P0 (P_i = A_i XOR B_i)
  input  logic [3:0] g,     // generate  G3..G0 (G_i = A_i AND B_i)
  input  logic       c0,    // carry input C0
  output logic [4:1] c      // lookahead carries C4..C1 (C4 goes to next sub-CLA)
);

  // Group generate and group propagate terms, independent of c0.
  logic [4:1] gg;
  logic [4:1] pp;

  always_comb begin
    gg[1] = g[0];
    gg[2] = g[1] | (p[1] & g[0]);
    gg[3] = g[2] | (p[2] & g[1]) | (p[2] & p[1] & g[0]);
    gg[4] = g[3] | (p[3] & g[2]) | (p[3] & p[2] & g[1]) | (p[3] & p[2] & p[1] & g[0]);

    pp[1] = p[0];
    pp[2] = p[1] & p[0];
    pp[3] = p[2] & p[1] & p[0];
    pp[4] = p[3] & p[2] & p[1] & p[0];

    // AO21 stage: c = gg OR (pp AND c0)
    for (int i = 1; i <= 4; i++) begin
      c[i] = gg[i] | (pp[i] & c0);
    end
  end

endmodule
