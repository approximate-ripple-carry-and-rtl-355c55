// adder_pkg - constants and types shared by the approximate adder family.
//
// The adders split an N-bit addition into an accurate upper part, built
// either as a ripple carry adder (RCA) or as a chain of 4-bit carry
// lookahead adders (CLA), and an approximate lower part of K bits in which
// every sum bit is the OR of the two operand bits. This package holds the
// operand width, the sub-CLA size and the architecture selector. The 32-bit
// width and the 4-bit sub-CLA size are the paper's; the enum encoding is a
// choice of this design.
`timescale 1ns/1ps

package adder_pkg;

  // Operand width of the adders evaluated (32-bit addition).
  localparam int unsigned ADDER_WIDTH = 32;

  // Width of one carry lookahead sub-adder (4-bit sub-CLA).
  localparam int unsigned CLA_GROUP = 4;

  // Topology of the accurate upper part.
  typedef enum logic {
    ARCH_RCA = 1'b0,  // ripple carry: cascade of full adders
    ARCH_CLA = 1'b1   // carry lookahead: cascade of 4-bit sub-CLAs
  } arch_e;

endpackage
