// approx_adder - N-bit approximate adder with an accurate RCA or CLA upper
// part and an OR-gate lower part.
//
// The N-bit addition is split at bit K. The K least significant sum bits
// come from or_approx (SUM_i = A_i OR B_i, no carry). The N-K upper bits
// are added exactly by an accurate adder whose carry input is tied to 0,
// so no carry ever crosses from the lower part into the upper part; the
// upper part's carry output is the adder's carry output C(N). The accurate
// part is a ripple carry adder (ARCH = ARCH_RCA, N-K full adders) or a
// cascade of (N-K)/4 4-bit sub-CLAs (ARCH = ARCH_CLA). K = 0 gives the
// fully accurate adder. Both parts work in parallel; the design is purely
// combinational, and its delay is set by the N-K bit accurate part alone.
//
// Interface: a, b (N bits) in; sum (N bits) and cout out. There is no
// clock and no carry input, as in the paper's approximate adders.
//
// Follows the paper: N = 32, approximation sizes 4, 8, 12, 16 and 20, the
// two accurate-part topologies, the OR approximation and the grounded
// carry input. This design's own choices: the default K = 4 (the paper
// evaluates five sizes and names no main one) and the default ARCH_CLA
// (the topology the paper recommends). For ARCH_CLA, N-K must be a
// multiple of 4.
`timescale 1ns/1ps

module approx_adder
  import adder_pkg::*;
#(
  parameter int unsigned N    = ADDER_WIDTH,  // operand width
  parameter int unsigned K    = 4,            // approximation size (LSBs)
  parameter arch_e       ARCH = ARCH_CLA      // accurate-part topology
) (
  input  logic [N-1:0] a,     // augend A(N-1)..A0
  input  logic [N-1:0] b,     // addend B(N-1)..B0
  output logic [N-1:0] sum,   // SUM(N-1)..SUM0
  output logic         cout   // carry output / overflow C(N)
);

  localparam int unsigned M = N - K;  // accurate part width

  if (K >= N) begin : g_k_check
    $error("approx_adder: K (%0d) must be smaller than N (%0d)", K, N);
  end

  // Approximate lower part.
  if (K > 0) begin : g_approx
    or_approx #(.WIDTH(K)) u_or (
      .a  (a[K-1:0]),
      .b  (b[K-1:0]),
      .sum(sum[K-1:0])
    );
  end

  // Accurate upper part, carry input grounded.
  if (ARCH == ARCH_RCA) begin : g_rca
    rca #(.WIDTH(M)) u_rca (
      .a   (a[N-1:K]),
      .b   (b[N-1:K]),
      .cin (1'b0),
      .sum (sum[N-1:K]),
      .cout(cout)
    );
  end else begin : g_cla
    cla #(.WIDTH(M)) u_cla (
      .a   (a[N-1:K]),
      .b   (b[N-1:K]),
      .cin (1'b0),
      .sum (sum[N-1:K]),
      .cout(cout)
    );
  end

endmodule
