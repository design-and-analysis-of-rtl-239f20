// tb_hbaa_block_pmf -- exhaustive error distribution of approximate sub-adders
// in the overlap case (H-S < L), compared with the closed-form probabilities.
//
// Every (L,S) with H-S < L is instantiated for H = 4 (10 blocks) and H = 8
// (36 blocks) with the carry-out in use, and driven with all 4^H operand
// pairs. The error e = a + b - {cout, sum} is histogrammed and compared,
// count by count, with the prediction built from the block's segments
// (T = H-S, L2 = L-T):
//   * segment 1, bits [0,T): OR gates without carry. An error x whose set
//     bits are I occurs in 3^(T-|I|) of the 4^T input pairs (each bit of I
//     generating, every other bit not);
//   * segment 2, bits [T,L): OR gates whose carry is still computed. With no
//     generating bit there is no error (3^L2 pairs). Otherwise let the
//     highest generating bit leave L21 bits above it and L22 bits at and
//     below it. If all L21 bits propagate the carry leaves the segment and
//     the error is x - 2^L2, in 2^L21 * 3^(L22-|I|) pairs; if at least one
//     kills it the error is x, in sum_{i>=1} C(L21,i) 2^(L21-i) * 3^(L22-|I|)
//     pairs;
//   * segment 3, bits [L,H): exact, adding no error, 4^(H-L) pairs each.
// The block error is x1 + 2^T * e2 over all combinations. These are the
// segment probabilities of the analytical error model for this case, scaled
// to pair counts; they are evaluated here independently of the RTL.
`timescale 1ns/1ps
module tb_hbaa_block_pmf;
  import hbaa_ref_pkg::*;

  localparam int NC  = 46;
  localparam int OFS = 256;   // histogram index = error + OFS

  // Configuration i: the H=4 blocks first, then H=8; L ascending, then S.
  function automatic int unsigned cfg_field(int i, int unsigned which);
    int n = 0;
    for (int unsigned h = 4; h <= 8; h += 4)
      for (int unsigned l = 1; l <= h; l++)
        for (int unsigned s = h - l + 1; s <= h; s++) begin
          if (n == i) return (which == 0) ? h : (which == 1) ? l : s;
          n++;
        end
    return 0;
  endfunction

  logic [7:0] a, b;
  logic [8:0] res [NC];

  for (genvar i = 0; i < NC; i++) begin : g_blk
    localparam int unsigned H = cfg_field(i, 0);
    logic [H-1:0] s;
    logic         co;
    hbaa_approx_block #(.H(H), .L(cfg_field(i, 1)), .S(cfg_field(i, 2)), .COUT_USED(1'b1)) dut (
      .a(a[H-1:0]), .b(b[H-1:0]), .sum(s), .cout(co));
    assign res[i] = 9'({co, s});
  end

  int checks = 0, failures = 0;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint unsigned pow_u(longint unsigned base, int unsigned e);
    longint unsigned r = 1;
    for (int unsigned i = 0; i < e; i++) r *= base;
    return r;
  endfunction

  function automatic longint unsigned binom(int unsigned n, int unsigned k);
    longint unsigned r = 1;
    for (int unsigned i = 0; i < k; i++) r = r * 64'(n - i) / 64'(i + 1);
    return r;
  endfunction

  initial begin
    longint unsigned seen [NC][2*OFS];
    longint unsigned pred [2*OFS];
    longint unsigned seg2 [2*OFS];
    longint unsigned n1, n2, kill_ways, total;
    int unsigned     h, l, s, t, l2, k, l21, l22, top;
    int              e, e2;

    for (int i = 0; i < NC; i++)
      for (int j = 0; j < 2 * OFS; j++) seen[i][j] = 0;

    for (int unsigned x = 0; x < 256; x++) begin
      for (int unsigned y = 0; y < 256; y++) begin
        a = 8'(x);
        b = 8'(y);
        #1;
        for (int i = 0; i < NC; i++) begin
          h = cfg_field(i, 0);
          if (h == 4 && (x > 15 || y > 15)) continue;
          checks++;
          if (64'(res[i]) != ref_block(h, cfg_field(i, 1), cfg_field(i, 2), 1'b1, 64'(x), 64'(y))) begin
            failures++;
            if (failures < 20) $display("FAIL block%0d a=%h b=%h got=%h", i, x, y, res[i]);
          end
          e = int'(x + y) - int'(res[i]);
          seen[i][e + OFS]++;
        end
      end
    end

    for (int i = 0; i < NC; i++) begin
      h  = cfg_field(i, 0);
      l  = cfg_field(i, 1);
      s  = cfg_field(i, 2);
      t  = h - s;
      l2 = l - t;
      // Segment 2 counts, indexed by e2 + OFS.
      for (int j = 0; j < 2 * OFS; j++) begin
        seg2[j] = 0;
        pred[j] = 0;
      end
      seg2[OFS] = pow_u(3, l2);
      for (int unsigned x2 = 1; x2 < (1 << l2); x2++) begin
        k   = $countones(x2);
        top = 0;
        for (int unsigned bpos = 0; bpos < l2; bpos++) if (x2[bpos]) top = bpos;
        l22 = top + 1;
        l21 = l2 - l22;
        kill_ways = 0;
        for (int unsigned j = 1; j <= l21; j++) kill_ways += binom(l21, j) * pow_u(2, l21 - j);
        seg2[int'(x2) - (1 << l2) + OFS] += pow_u(2, l21) * pow_u(3, l22 - k);
        seg2[int'(x2) + OFS]             += kill_ways * pow_u(3, l22 - k);
      end
      // Combine with segment 1 and the exact segment 3.
      for (int unsigned x1 = 0; x1 < (1 << t); x1++) begin
        n1 = pow_u(3, t - $countones(x1)) * pow_u(4, h - l);
        for (int j = 0; j < 2 * OFS; j++) begin
          if (seg2[j] == 0) continue;
          e2 = j - OFS;
          n2 = seg2[j];
          pred[int'(x1) + e2 * (1 << t) + OFS] += n1 * n2;
        end
      end
      total = 0;
      for (int j = 0; j < 2 * OFS; j++) begin
        total += pred[j];
        checks++;
        if (pred[j] != seen[i][j]) begin
          failures++;
          if (failures < 40)
            $display("FAIL H=%0d L=%0d S=%0d error %0d: %0d pairs, predicted %0d", h, l, s, j - OFS, seen[i][j], pred[j]);
        end
      end
      checks++;
      if (total != pow_u(4, h)) begin
        failures++;
        $display("FAIL H=%0d L=%0d S=%0d predicted counts add to %0d", h, l, s, total);
      end
    end

    $display("%0d blocks with H-S < L: error distribution matches the segment model", NC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
