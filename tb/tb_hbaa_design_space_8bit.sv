// tb_hbaa_design_space_8bit -- exhaustive error analysis of the whole design
// space of 8-bit HBAAs built from 4-bit sub-adders.
//
// A 4-bit approximate sub-adder has (4+1)*(4+1)-1 = 24 configurations (every
// L and S in 0..4, except L=0,S=4, which is the exact adder). An 8-bit adder
// has one or two approximate sub-adders, so the space holds 24 + 24*24 = 600
// adders. All 600 are instantiated side by side and driven with every one of
// the 2^16 operand pairs.
//
// Checks:
//   * every output bit-exact against the arithmetic model in hbaa_ref_pkg;
//   * the space has exactly 600 members and none of them is exact (ER > 0);
//   * for one approximate sub-adder with H-S >= L the error is never negative
//     and splits into the OR bits (each costs 2^i when a_i = b_i = 1) and the
//     carry lost at the truncation point T = H-S out of the w = T-L bits in
//     between. The summed absolute error over all inputs must then equal
//     2^14*(2^L-1) + 2^T * 2^(15-w)*(2^w-1), and the number of error-free
//     pairs 3^L * (4^w - 2^(w-1)*(2^w-1)) * 4^(8-L-w).
// MED, NMED (= MED / 2^8) and ER are printed for the extremes of the space.
// The selection of configurations follows the paper's counting of the design
// space; the closed-form checks are derived here, not copied.
`timescale 1ns/1ps
module tb_hbaa_design_space_8bit;
  import hbaa_pkg::*;
  import hbaa_ref_pkg::*;

  localparam int unsigned N    = 8;
  localparam int unsigned H    = 4;
  localparam int unsigned CH   = (H + 1) * (H + 1) - 1;
  localparam int          NCFG = CH + CH * CH;

  // Maps 0..CH-1 onto the (L,S) pairs, skipping the exact pair L=0,S=H.
  function automatic int unsigned pair_l(int unsigned p);
    int unsigned q = (p >= H) ? p + 1 : p;
    return q / (H + 1);
  endfunction
  function automatic int unsigned pair_s(int unsigned p);
    int unsigned q = (p >= H) ? p + 1 : p;
    return q % (H + 1);
  endfunction

  // Configuration c: 0..CH-1 use one approximate sub-adder, the rest two.
  function automatic int unsigned cfg_k(int c);
    return (c < int'(CH)) ? 1 : 2;
  endfunction
  function automatic int unsigned cfg_pair(int c, int unsigned j);
    if (c < int'(CH)) return (j == 0) ? int'(c) : 0;
    return (j == 0) ? (c - CH) % CH : (c - CH) / CH;
  endfunction
  function automatic cfg_vec_t cfg_lvec(int c);
    cfg_vec_t v = '{default: 0};
    for (int unsigned j = 0; j < cfg_k(c); j++) v[j] = pair_l(cfg_pair(c, j));
    return v;
  endfunction
  function automatic cfg_vec_t cfg_svec(int c);
    cfg_vec_t v = '{default: 0};
    for (int unsigned j = 0; j < cfg_k(c); j++) v[j] = pair_s(cfg_pair(c, j));
    return v;
  endfunction

  logic [N-1:0] a, b;
  logic [N:0]   res [NCFG];

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    hbaa_adder #(.N(N), .H(H), .NUM_APPROX(cfg_k(c)), .L_VEC(cfg_lvec(c)), .S_VEC(cfg_svec(c))) dut (
      .a(a), .b(b), .sum(res[c]));
  end

  int checks = 0, failures = 0;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned total [NCFG];
    int unsigned     nerr [NCFG];
    int unsigned     lv [NCFG][], sv [NCFG][];
    longint unsigned want, expect_total, expect_ok, l, t, w;
    longint          ed;
    int              cmin, cmax;

    for (int c = 0; c < NCFG; c++) begin
      total[c] = 0;
      nerr[c]  = 0;
      lv[c] = new[cfg_k(c)];
      sv[c] = new[cfg_k(c)];
      for (int unsigned j = 0; j < cfg_k(c); j++) begin
        lv[c][j] = pair_l(cfg_pair(c, j));
        sv[c][j] = pair_s(cfg_pair(c, j));
      end
    end

    for (int unsigned x = 0; x < (1 << N); x++) begin
      for (int unsigned y = 0; y < (1 << N); y++) begin
        a = N'(x);
        b = N'(y);
        #1;
        for (int c = 0; c < NCFG; c++) begin
          want = ref_adder(N, H, cfg_k(c), lv[c], sv[c], 64'(x), 64'(y));
          checks++;
          if (64'(res[c]) != want) begin
            failures++;
            if (failures < 20) $display("FAIL cfg%0d a=%h b=%h got=%h want=%h", c, x, y, res[c], want);
          end
          ed = longint'(64'(x) + 64'(y)) - longint'(res[c]);
          if (ed != 0) nerr[c]++;
          total[c] += longint'((ed < 0) ? -ed : ed);
        end
      end
    end

    // Size of the space: sum over i = 1..k of C_H^i with k = N/H = 2.
    checks++;
    if (NCFG != CH + CH * CH || CH != 24) begin
      failures++;
      $display("FAIL design space has %0d members", NCFG);
    end

    cmin = 0;
    cmax = 0;
    for (int c = 0; c < NCFG; c++) begin
      checks++;
      if (nerr[c] == 0) begin
        failures++;
        $display("FAIL cfg%0d is an exact adder", c);
      end
      if (total[c] < total[cmin]) cmin = c;
      if (total[c] > total[cmax]) cmax = c;
      if (c < int'(CH) && H - pair_s(c) >= pair_l(c)) begin
        l = 64'(pair_l(c));
        t = 64'(H - pair_s(c));
        w = t - l;
        expect_total = (64'd1 << 14) * ((64'd1 << l) - 1);
        if (w > 0) expect_total += (64'd1 << t) * (64'd1 << (15 - w)) * ((64'd1 << w) - 1);
        expect_ok = 1;
        for (longint unsigned i = 0; i < l; i++) expect_ok *= 3;
        expect_ok *= (64'd1 << (2 * w)) - ((w > 0) ? (64'd1 << (w - 1)) * ((64'd1 << w) - 1) : 0);
        expect_ok *= 64'd1 << (2 * (64'(N) - l - w));
        checks += 2;
        if (total[c] != expect_total) begin
          failures++;
          $display("FAIL cfg%0d L=%0d S=%0d summed error %0d, expected %0d", c, l, pair_s(c), total[c], expect_total);
        end
        if (64'(65536 - nerr[c]) != expect_ok) begin
          failures++;
          $display("FAIL cfg%0d L=%0d S=%0d error-free pairs %0d, expected %0d", c, l, pair_s(c), 65536 - nerr[c], expect_ok);
        end
      end
    end

    $display("8-bit, H=4: %0d configurations, each over all 65536 operand pairs", NCFG);
    $display("lowest  MED %0.4f (NMED %0.6f, ER %0.4f) at cfg%0d", real'(total[cmin]) / 65536.0,
             real'(total[cmin]) / 65536.0 / 256.0, real'(nerr[cmin]) / 65536.0, cmin);
    $display("highest MED %0.4f (NMED %0.6f, ER %0.4f) at cfg%0d", real'(total[cmax]) / 65536.0,
             real'(total[cmax]) / 65536.0 / 256.0, real'(nerr[cmax]) / 65536.0, cmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
