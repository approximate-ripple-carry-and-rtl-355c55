// cla - WIDTH-bit accurate carry lookahead adder.
//
// WIDTH/4 sub-CLAs (cla4) CLA1..CLA(WIDTH/4) in a cascade: CLA1 adds the
// least significant nibble with the carry input, and the lookahead carry
// C4 of each sub-CLA is the carry input of the next. The carry out of the
// last sub-CLA is the adder's carry output. Purely combinational; the
// critical path grows with WIDTH/4, one clg4 AO21 stage per nibble.
//
// Follows the paper's 32-bit accurate CLA (eight sub-CLAs) and the
// accurate parts of its approximate CLAs ((32-K)/4 sub-CLAs). WIDTH must
// be a multiple of 4, which an elaboration-time check enforces.
`timescale 1ns/1ps

module cla #(
  parameter int unsigned WIDTH = 32
) (
  input  logic [WIDTH-1:0] a,     // augend
  input  logic [WIDTH-1:0] b,     // addend
  input  logic             cin,   // carry input (tied to 0 by the users)
  output logic [WIDTH-1:0] sum,   // sum
  output logic             cout   // carry output / overflow
);

  import adder_pkg::CLA_GROUP;

  localparam int unsigned NGROUPS = WIDTH / CLA_GROUP;

  if (WIDTH % CLA_GROUP != 0 || WIDTH == 0) begin : g_width_check
    $error("cla: WIDTH (%0d) must be a positive multiple of %0d", WIDTH, CLA_GROUP);
  end

  // c[j] is the carry into sub-CLA j (0-based); c[NGROUPS] is the carry output.
  logic [NGROUPS:0] c;

  assign c[0] = cin;

  for (genvar j = 0; j < NGROUPS; j++) begin : g_cla
    cla4 u_cla4 (
      .a   (a[CLA_GROUP*j +: CLA_GROUP]),
      .b   (b[CLA_GROUP*j +: CLA_GROUP]),
      .cin (c[j]),
      .sum (sum[CLA_GROUP*j +: CLA_GROUP]),
      .cout(c[j+1])
    );
  end

  assign cout = c[NGROUPS];

endmodule
