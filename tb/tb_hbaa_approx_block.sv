// tb_hbaa_approx_block -- exhaustive check of approximate sub-adders in all
// three H-S versus L cases, with and without a used carry-out.
//
// For each configuration every pair of operands is applied and the output is
// compared with the arithmetic model in hbaa_ref_pkg. The error value
// (a + b) - approximate result is also checked against the ranges the
// analysis gives for each case, and for a few configurations against exact
// error probabilities:
//   L=2,S=2 (H-S=L) : error 0,1,2,3 with probability 9/16,3/16,3/16,1/16;
//   L=0,S=2         : error 2^(H-S)=4 with probability Pr(G1) = 6/16;
//   L=3,S=1, no cout: error >= 2^H (dropped half-adder carry) with 1/4;
//   L=2,S=3 (the drawn 4-bit example): exact per-input values.
`timescale 1ns/1ps
module tb_hbaa_approx_block;
  import hbaa_ref_pkg::*;

  localparam int NC = 14;
  //                             0  1  2  3  4  5  6  7  8  9 10 11 12 13
  localparam int unsigned CH [NC] = '{4, 4, 4, 4, 4, 4, 4, 4, 4, 4, 4, 4, 8, 4};
  localparam int unsigned CL [NC] = '{2, 2, 1, 0, 4, 4, 1, 3, 2, 0, 2, 4, 2, 0};
  localparam int unsigned CS [NC] = '{3, 2, 1, 2, 0, 2, 4, 1, 3, 4, 2, 2, 3, 0};
  localparam bit          CU [NC] = '{1, 1, 1, 1, 1, 1, 1, 0, 0, 1, 0, 0, 1, 1};

  logic [7:0] av [NC];
  logic [7:0] bv [NC];
  logic [7:0] sv [NC];
  logic       cv [NC];

  for (genvar i = 0; i < NC; i++) begin : g_dut
    hbaa_approx_block #(.H(CH[i]), .L(CL[i]), .S(CS[i]), .COUT_USED(CU[i])) dut (
      .a(av[i][CH[i]-1:0]), .b(bv[i][CH[i]-1:0]), .sum(sv[i][CH[i]-1:0]), .cout(cv[i]));
    if (CH[i] < 8) begin : g_pad
      assign sv[i][7:CH[i]] = '0;
    end
  end

  int checks = 0, failures = 0;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Error ranges of the three cases; a dropped block carry adds 2^H.
  function automatic bit in_case_range(int unsigned h, int unsigned l, int unsigned s, bit cu, int err);
    return in_range(h, l, s, err) || (!cu && in_range(h, l, s, err - (1 << h)));
  endfunction

  function automatic bit in_range(int unsigned h, int unsigned l, int unsigned s, int e);
    int unsigned t = h - s;
    if (t > l)       return (e >= 0 && e <= (1 << l) - 1) || (e >= (1 << t) && e <= (1 << t) + (1 << l) - 1);
    else if (t == l) return (e >= 0 && e <= (1 << l) - 1);
    else             return (e >= 0 && e <= (1 << l) - 1) || (e >= (1 << t) - (1 << l) && e <= -1);
  endfunction

  initial begin
    int cnt [int];
    int over;
    int sum_err;
    longint unsigned want, got;
    int err;
    for (int i = 0; i < NC; i++) begin
      av[i] = '0;
      bv[i] = '0;
    end
    for (int i = 0; i < NC; i++) begin
      cnt.delete();
      over = 0;
      sum_err = 0;
      for (int v = 0; v < (1 << (2 * CH[i])); v++) begin
        av[i] = 8'(v & ((1 << CH[i]) - 1));
        bv[i] = 8'(v >> CH[i]);
        #1;
        want = ref_block(CH[i], CL[i], CS[i], CU[i], 64'(av[i]), 64'(bv[i]));
        got  = (64'(cv[i]) << CH[i]) | 64'(sv[i]);
        checks++;
        if (got != want) begin
          failures++;
          if (failures < 20)
            $display("FAIL cfg%0d H=%0d L=%0d S=%0d a=%0d b=%0d got=%0d want=%0d",
                     i, CH[i], CL[i], CS[i], av[i], bv[i], got, want);
        end
        err = int'(av[i]) + int'(bv[i]) - int'(got);
        checks++;
        if (!in_case_range(CH[i], CL[i], CS[i], CU[i], err)) begin
          failures++;
          if (failures < 20) $display("FAIL cfg%0d error %0d outside the case's range", i, err);
        end
        if (cnt.exists(err)) cnt[err]++; else cnt[err] = 1;
        if (err >= (1 << CH[i])) over++;
        sum_err += (err < 0) ? -err : err;
      end
      $display("cfg%0d H=%0d L=%0d S=%0d cout_used=%0d: MED=%0f over 2^%0d inputs",
               i, CH[i], CL[i], CS[i], CU[i], real'(sum_err) / real'(1 << (2 * CH[i])), 2 * CH[i]);
      case (i)
        1: begin
          checks++;
          if (cnt[0] != 144 || cnt[1] != 48 || cnt[2] != 48 || cnt[3] != 16 || sum_err != 192) begin
            failures++;
            $display("FAIL cfg1 E_OR PMF %0d %0d %0d %0d", cnt[0], cnt[1], cnt[2], cnt[3]);
          end
        end
        3: begin
          checks++;
          if (cnt[4] != 96 || cnt[0] != 160) begin
            failures++;
            $display("FAIL cfg3 E_T PMF: err=4 %0d times", cnt[4]);
          end
        end
        7: begin
          checks++;
          if (over != 64) begin
            failures++;
            $display("FAIL cfg7 HA_Approx: carry dropped %0d times, want 64", over);
          end
        end
        default: ;
      endcase
    end
    // Drawn 4-bit example (L=2, S=3): a=0011, b=0011. Bit 0: OR, no carry;
    // bit 1: OR, and g1=1 is the carry into the 2-bit RCA; bits 3:2 = 0+0+1.
    av[0] = 8'h3;
    bv[0] = 8'h3;
    #1;
    checks++;
    if (sv[0][3:0] != 4'b0111 || cv[0] != 1'b0) begin
      failures++;
      $display("FAIL drawn example: sum=%b cout=%b", sv[0][3:0], cv[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
