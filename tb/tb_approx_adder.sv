// tb_approx_adder - end-to-end self-check of the approximate adder in all
// twelve configurations of the comparison: ripple carry and carry
// lookahead accurate parts, each with approximation sizes 0 (fully
// accurate), 4, 8, 12, 16 and 20 bits.
//
// All twelve adders see the same operands. The testbench first applies
// directed vectors (for every split point, a carry generated at the lowest
// accurate bit that must travel to the carry output, and operands whose
// low bits would carry), then 1000 random operand pairs, one every 4 ns
// (250 MHz), as in the paper's power simulations. Every output is checked
// 1 ns after the operands change, so the adder must settle within the
// same cycle. The reference model is independent of the RTL: the upper
// N-K bits of a and b are added as integers, the lower K bits are a | b.
//
// For each configuration it counts the mechanisms the design has: carry
// output (overflow), a carry the approximate part drops at the split, the
// resulting wrong sum, and a carry running the full length of the accurate
// part. It also checks that the error equals the AND of the low K operand
// bits, which holds for every input. A mechanism that never happened in a configuration where it can
// happen is a failure. It also prints the mean and largest absolute error
// against the exact sum, as information. Watchdog included.
`timescale 1ns/1ps
module tb_approx_adder;

  import adder_pkg::*;

  localparam int N      = 32;
  localparam int NK     = 6;
  localparam int KS[NK] = '{0, 4, 8, 12, 16, 20};
  localparam int NVEC   = 1000;

  logic [N-1:0] a, b;
  logic [N-1:0] sum_o  [2][NK];
  logic         cout_o [2][NK];

  for (genvar ar = 0; ar < 2; ar++) begin : g_arch
    for (genvar ki = 0; ki < NK; ki++) begin : g_k
      approx_adder #(
        .N   (N),
        .K   (KS[ki]),
        .ARCH(ar == 0 ? ARCH_RCA : ARCH_CLA)
      ) dut (
        .a   (a),
        .b   (b),
        .sum (sum_o[ar][ki]),
        .cout(cout_o[ar][ki])
      );
    end
  end

  int checks = 0;
  int failures = 0;
  int n_ovf   [2][NK];
  int n_drop  [2][NK];
  int n_err   [2][NK];
  int n_chain [2][NK];
  longint err_sum [2][NK];
  longint err_max [2][NK];

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [N-1:0] va, input logic [N-1:0] vb);
    a = va;
    b = vb;
    #1;
    for (int ar = 0; ar < 2; ar++) begin
      for (int ki = 0; ki < NK; ki++) begin
        int     k;
        longint mask, upper, exp_full, exact, got, diff;
        logic [N-1:0] exp_sum;
        logic         exp_cout;
        k        = KS[ki];
        mask     = (64'd1 << k) - 1;
        upper    = (longint'(va) >> k) + (longint'(vb) >> k);
        exp_full = (upper << k) | ((longint'(va) | longint'(vb)) & mask);
        exp_sum  = exp_full[N-1:0];
        exp_cout = exp_full[N];
        checks++;
        if (sum_o[ar][ki] != exp_sum || cout_o[ar][ki] != exp_cout) begin
          failures++;
          $display("FAIL %s K=%0d a=%h b=%h got %0d_%h exp %0d_%h",
                   ar == 0 ? "RCA" : "CLA", k, va, vb,
                   cout_o[ar][ki], sum_o[ar][ki], exp_cout, exp_sum);
        end
        // Mechanism counters, from the operands and the DUT outputs.
        exact = longint'(va) + longint'(vb);
        got   = {31'd0, cout_o[ar][ki], sum_o[ar][ki]};
        diff  = exact > got ? exact - got : got - exact;
        err_sum[ar][ki] += diff;
        if (diff > err_max[ar][ki]) err_max[ar][ki] = diff;
        if (cout_o[ar][ki]) n_ovf[ar][ki]++;
        if (k > 0 && ((longint'(va) & mask) + (longint'(vb) & mask)) > mask) n_drop[ar][ki]++;
        if (diff != 0) n_err[ar][ki]++;
        // Error identity: a + b = (a | b) + (a & b), so the result falls
        // short of the exact sum by exactly the AND of the low K bits.
        checks++;
        if (exact - got != (longint'(va) & longint'(vb) & mask)) begin
          failures++;
          $display("FAIL error identity %s K=%0d a=%h b=%h", ar == 0 ? "RCA" : "CLA", k, va, vb);
        end
        // Carry generated at bit k and propagated through every bit above.
        if (va[k] & vb[k] && ((va ^ vb) >> (k + 1)) == ({N{1'b1}} >> (k + 1))) n_chain[ar][ki]++;
      end
    end
    #3;
  endtask

  initial begin
    for (int ar = 0; ar < 2; ar++)
      for (int ki = 0; ki < NK; ki++) begin
        n_ovf[ar][ki] = 0; n_drop[ar][ki] = 0; n_err[ar][ki] = 0; n_chain[ar][ki] = 0;
        err_sum[ar][ki] = 0; err_max[ar][ki] = 0;
      end

    // Directed: full-length carry from each split point, dropped low carries.
    for (int ki = 0; ki < NK; ki++) begin
      automatic int k = KS[ki];
      automatic logic [N-1:0] ones_above = {N{1'b1}} << (k + 1);
      apply(ones_above | (N'(1) << k), N'(1) << k);
      apply({N{1'b1}}, {N{1'b1}});
      apply(N'(1) << (k > 0 ? k - 1 : 0), N'(1) << (k > 0 ? k - 1 : 0));
    end
    apply('0, '0);

    // Random workload: 1000 vectors at 4 ns intervals.
    for (int i = 0; i < NVEC; i++) apply($urandom, $urandom);

    for (int ar = 0; ar < 2; ar++) begin
      for (int ki = 0; ki < NK; ki++) begin
        automatic int k = KS[ki];
        $display("%s K=%2d: overflows=%0d dropped_carries=%0d wrong_sums=%0d full_chains=%0d mean_abs_err=%0d max_abs_err=%0d",
                 ar == 0 ? "RCA" : "CLA", k, n_ovf[ar][ki], n_drop[ar][ki], n_err[ar][ki],
                 n_chain[ar][ki], err_sum[ar][ki] / longint'(NVEC), err_max[ar][ki]);
        checks++;
        if (n_ovf[ar][ki] == 0 || n_chain[ar][ki] == 0 ||
            (k > 0 && (n_drop[ar][ki] == 0 || n_err[ar][ki] == 0)) ||
            (k == 0 && n_err[ar][ki] != 0)) begin
          failures++;
          $display("FAIL mechanism count for %s K=%0d", ar == 0 ? "RCA" : "CLA", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
