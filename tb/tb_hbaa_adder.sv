// tb_hbaa_adder -- end-to-end test of the HBAA at its default configuration,
// the 16-bit adder of 4-bit sub-adders HBAA{[3,2],[1,2]}.
//
// Drives directed corner operands and 1,000,000 uniformly random operand
// pairs, and compares every sum[16:0] with the arithmetic model in
// hbaa_ref_pkg. It then checks the error statistics against values worked
// out by hand from the error analysis (all errors are non-negative here):
//   MED = (1+2+4)/4 (OR bits 0..2) + 16/4 (carry dropped by the half adder
//         at bit 3) + (16+32)/4 (OR bits 4,5) = 17.75
//   ER  = 1 - (3/4)^4 * (3/4)^2 = 0.822  (an error needs some a_i&b_i = 1 in
//         bits 0..5)
// and counts every mechanism of the design, failing if one never occurs:
// an OR-gate sum error, the dropped carry of sub-adder 1, the carry handed
// from sub-adder 2 (the most significant approximate one) to the accurate
// sub-adders, its ripple on into sub-adder 4, and the final carry-out.
`timescale 1ns/1ps
module tb_hbaa_adder;
  import hbaa_ref_pkg::*;

  localparam int unsigned N = 16, H = 4, NAPPROX = 2;
  localparam int unsigned NSAMPLES = 1_000_000;

  logic [N-1:0] a, b;
  logic [N:0]   sum;

  hbaa_adder dut (.a(a), .b(b), .sum(sum));

  int checks = 0, failures = 0;
  int unsigned l_cfg[] = '{3, 2};
  int unsigned s_cfg[] = '{1, 2};

  // mechanism counters
  int n_or_err = 0, n_ha_drop = 0, n_ms_carry = 0, n_ripple = 0, n_cout = 0;

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [N-1:0] x, input logic [N-1:0] y, inout real sum_ed, inout int n_err);
    longint unsigned want;
    longint          ed;
    a = x;
    b = y;
    #1;
    want = ref_adder(N, H, NAPPROX, l_cfg, s_cfg, 64'(x), 64'(y));
    checks++;
    if (64'(sum) != want) begin
      failures++;
      if (failures < 20) $display("FAIL a=%h b=%h sum=%h want=%h", x, y, sum, want);
    end
    ed = longint'(x) + longint'(y) - longint'(sum);
    if (ed < 0) ed = -ed;
    sum_ed += real'(ed);
    if (ed != 0) n_err++;
    // mechanisms, decided from the operands alone
    if (((x & y) & 16'h0037) != 0) n_or_err++;
    if (x[3] & y[3]) n_ha_drop++;
    if ((int'(x[7:6]) + int'(y[7:6])) >= 4) n_ms_carry++;
    if ((int'(x[11:8]) + int'(y[11:8]) + ((int'(x[7:6]) + int'(y[7:6])) >> 2)) >= 16) n_ripple++;
    if (sum[N]) n_cout++;
  endtask

  initial begin
    real sum_ed;
    int  n_err;
    real med, er;
    sum_ed = 0.0;
    n_err = 0;
    // corners
    apply(16'h0000, 16'h0000, sum_ed, n_err);
    apply(16'hFFFF, 16'hFFFF, sum_ed, n_err);
    apply(16'hFFFF, 16'h0001, sum_ed, n_err);
    apply(16'h00C0, 16'h0040, sum_ed, n_err);   // carry out of sub-adder 2 into sub-adder 3
    apply(16'h0FC0, 16'h0040, sum_ed, n_err);   // ... rippling through sub-adder 3 into 4
    apply(16'h0008, 16'h0008, sum_ed, n_err);   // half-adder carry of sub-adder 1 dropped
    apply(16'h0030, 16'h0030, sum_ed, n_err);   // OR bits 4,5 both generating
    // check the directed values against hand-computed sums
    a = 16'h0FC0; b = 16'h0040; #1;
    checks++;
    if (sum != 17'h01000) begin failures++; $display("FAIL ripple case sum=%h", sum); end
    a = 16'h0008; b = 16'h0008; #1;
    checks++;
    if (sum != 17'h00000) begin failures++; $display("FAIL dropped carry case sum=%h", sum); end
    a = 16'h0007; b = 16'h0005; #1;             // OR: 0111 | 0101 = 0111, exact would be 1100
    checks++;
    if (sum != 17'h00007) begin failures++; $display("FAIL OR case sum=%h", sum); end
    a = 16'h00C0; b = 16'h00C0; #1;             // sub-adder 2: bits 7:6 = 11+11 -> carry into bit 8
    checks++;
    if (sum != 17'h00180) begin failures++; $display("FAIL carry handoff sum=%h", sum); end

    sum_ed = 0.0;
    n_err = 0;
    for (int unsigned i = 0; i < NSAMPLES; i++)
      apply(16'($urandom), 16'($urandom), sum_ed, n_err);
    med = sum_ed / real'(NSAMPLES);
    er  = real'(n_err) / real'(NSAMPLES);
    $display("random %0d samples: MED=%0f (expected 17.75)  ER=%0f (expected %0f)",
             NSAMPLES, med, er, 1.0 - (0.75 ** 6));
    checks++;
    if (med < 17.75 * 0.99 || med > 17.75 * 1.01) begin failures++; $display("FAIL MED"); end
    checks++;
    if (er < (1.0 - 0.75 ** 6) - 0.005 || er > (1.0 - 0.75 ** 6) + 0.005) begin failures++; $display("FAIL ER"); end

    $display("mechanisms: or_error=%0d ha_carry_dropped=%0d ms_approx_carry=%0d accurate_ripple=%0d carry_out=%0d",
             n_or_err, n_ha_drop, n_ms_carry, n_ripple, n_cout);
    checks += 5;
    if (n_or_err == 0)   begin failures++; $display("FAIL OR-gate error never happened"); end
    if (n_ha_drop == 0)  begin failures++; $display("FAIL dropped carry never happened"); end
    if (n_ms_carry == 0) begin failures++; $display("FAIL carry hand-off never happened"); end
    if (n_ripple == 0)   begin failures++; $display("FAIL accurate ripple never happened"); end
    if (n_cout == 0)     begin failures++; $display("FAIL carry-out never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
