// tb_approx_adder_full - the approximate adder at its default parameters
// (32 bits, carry lookahead accurate part, 4-bit OR approximation), run
// through the paper's evaluation workload: 1000 random operand pairs
// applied every 4 ns (250 MHz), after a few directed vectors.
//
// Each result is checked 1 ns after the operands change against an
// integer model: the upper 28 bits are added exactly with no carry in, the
// lower 4 bits are a | b. It counts overflows, carries dropped at the
// split, wrong sums and full-length carry chains through the accurate
// part, and fails if any of them never happened. It prints the error
// statistics against the exact sum. Watchdog included.
`timescale 1ns/1ps
module tb_approx_adder_full;

  localparam int N    = 32;
  localparam int K    = 4;     // default approximation size of approx_adder
  localparam int NVEC = 1000;

  logic [N-1:0] a, b, sum;
  logic         cout;

  approx_adder dut (.a(a), .b(b), .sum(sum), .cout(cout));

  int checks = 0;
  int failures = 0;
  int n_ovf = 0, n_drop = 0, n_err = 0, n_chain = 0;
  longint err_sum = 0, err_max = 0;

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [N-1:0] va, input logic [N-1:0] vb);
    longint mask, upper, exp_full, exact, got, diff;
    a = va;
    b = vb;
    #1;
    mask     = (64'd1 << K) - 1;
    upper    = (longint'(va) >> K) + (longint'(vb) >> K);
    exp_full = (upper << K) | ((longint'(va) | longint'(vb)) & mask);
    checks++;
    if (sum != exp_full[N-1:0] || cout != exp_full[N]) begin
      failures++;
      $display("FAIL a=%h b=%h got %0d_%h exp %0d_%h", va, vb, cout, sum, exp_full[N], exp_full[N-1:0]);
    end
    exact = longint'(va) + longint'(vb);
    got   = {31'd0, cout, sum};
    diff  = exact > got ? exact - got : got - exact;
    err_sum += diff;
    if (diff > err_max) err_max = diff;
    if (cout) n_ovf++;
    if (((longint'(va) & mask) + (longint'(vb) & mask)) > mask) n_drop++;
    if (diff != 0) n_err++;
    checks++;                                      // error = low bits of a & b
    if (exact - got != (longint'(va) & longint'(vb) & mask)) begin
      failures++;
      $display("FAIL error identity a=%h b=%h", va, vb);
    end
    if (va[K] & vb[K] && ((va ^ vb) >> (K + 1)) == ({N{1'b1}} >> (K + 1))) n_chain++;
    #3;
  endtask

  initial begin
    apply(({N{1'b1}} << (K + 1)) | (N'(1) << K), N'(1) << K);  // carry bit 4 -> C32
    apply(32'h0000_000F, 32'h0000_0001);                       // carry dropped at split
    apply({N{1'b1}}, {N{1'b1}});
    apply('0, '0);
    for (int i = 0; i < NVEC; i++) apply($urandom, $urandom);
    $display("overflows=%0d dropped_carries=%0d wrong_sums=%0d full_chains=%0d mean_abs_err=%0d max_abs_err=%0d",
             n_ovf, n_drop, n_err, n_chain, err_sum / longint'(NVEC), err_max);
    checks++;
    if (n_ovf == 0 || n_drop == 0 || n_err == 0 || n_chain == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
