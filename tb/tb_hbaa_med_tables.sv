// tb_hbaa_med_tables -- Monte Carlo error analysis of the HBAA configurations
// listed in the published MED accuracy tables (16-bit and 32-bit adders).
//
// Every configuration is instantiated as its own hbaa_adder; all of them see
// the same uniformly random operands. Each output is compared bit-exactly
// with the arithmetic model in hbaa_ref_pkg, and the mean error distance
// MED = E|a + b - result| is accumulated.
//   * 32-bit rows (4-bit sub-adders): the measured MED must lie within 2% of
//     the published Monte Carlo value (1 billion samples).
//   * 16-bit rows: the published table does not state the sub-adder width H;
//     with the width that fits the vectors, three rows are reproduced within
//     2% and are checked; the others are printed next to the published
//     figure for reference only (see the documentation for this gap).
`timescale 1ns/1ps
module tb_hbaa_med_tables;
  import hbaa_pkg::*;
  import hbaa_ref_pkg::*;

  localparam int unsigned NSAMPLES = 400_000;
  localparam int NW = 21;

  localparam int unsigned WN [NW] = '{32, 32, 32, 32, 32, 32,
                                      16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16, 16};
  localparam int unsigned WH [NW] = '{4, 4, 4, 4, 4, 4,
                                      8, 4, 4, 4, 4, 4, 2, 4, 8, 2, 2, 2, 2, 2, 2};
  localparam int unsigned WK [NW] = '{4, 2, 2, 4, 4, 5,
                                      2, 2, 2, 4, 2, 3, 4, 2, 1, 6, 7, 6, 8, 6, 8};
  localparam logic [63:0] WL [NW] = '{
    64'h2444, 64'h24, 64'h14, 64'h1444, 64'h2444, 64'h14444,
    64'h25, 64'h32, 64'h44, 64'h3241, 64'h24, 64'h323,
    64'h1222, 64'h44, 64'h6, 64'h201212, 64'h2212222, 64'h200211,
    64'h11201212, 64'h201212, 64'h11221212};
  localparam logic [63:0] WS [NW] = '{
    64'h2000, 64'h20, 64'h30, 64'h3000, 64'h3000, 64'h30000,
    64'h44, 64'h40, 64'h32, 64'h1304, 64'h20, 64'h122,
    64'h1000, 64'h20, 64'h3, 64'h121000, 64'h1221201, 64'h021110,
    64'h22121211, 64'h121011, 64'h22021221};
  // WL/WS hold one configuration vector each, one hex digit per sub-adder,
  // least significant sub-adder in the lowest digit.
  function automatic cfg_vec_t unpack_cfg(logic [63:0] x);
    cfg_vec_t v;
    for (int i = 0; i < MAX_BLOCKS; i++) v[i] = int'(x[4*i +: 4]);
    return v;
  endfunction

  function automatic string cfg_str(logic [63:0] x, int unsigned k);
    string r = "[";
    for (int unsigned i = 0; i < k; i++) r = {r, $sformatf("%0d", x[4*i +: 4]), (i + 1 < k) ? "," : "]"};
    return r;
  endfunction

  // Published MED; CHECKED rows must be matched within 2 %.
  localparam real PAPER_MED [NW] = '{4095.59, 15.75, 7.75, 2047.78, 3071.98, 32766.54,
                                     1854.24, 35.88, 72.02, 9310.41, 19.26, 595.41, 47.28, 65.45,
                                     0.25, 1038.74, 3817.06, 1519.34, 9491.73, 1024.68, 9463.51};
  localparam bit CHECKED [NW] = '{1, 1, 1, 1, 1, 1,  1, 1, 1,  0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};

  logic [31:0] a, b;
  logic [32:0] res [NW];

  for (genvar w = 0; w < NW; w++) begin : g_cfg
    logic [WN[w]:0] s;
    hbaa_adder #(.N(WN[w]), .H(WH[w]), .NUM_APPROX(WK[w]), .L_VEC(unpack_cfg(WL[w])), .S_VEC(unpack_cfg(WS[w]))) dut (
      .a(a[WN[w]-1:0]), .b(b[WN[w]-1:0]), .sum(s));
    assign res[w] = 33'(s);
  end

  int checks = 0, failures = 0;

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real             total [NW];
    int unsigned     lv [NW][], sv [NW][];
    longint unsigned mask, x, y, want;
    longint          ed;
    real             med;
    for (int w = 0; w < NW; w++) begin
      total[w] = 0.0;
      lv[w] = new[WK[w]];
      sv[w] = new[WK[w]];
      for (int j = 0; j < int'(WK[w]); j++) begin
        lv[w][j] = int'(WL[w][4*j +: 4]);
        sv[w][j] = int'(WS[w][4*j +: 4]);
      end
    end
    for (int unsigned i = 0; i < NSAMPLES; i++) begin
      a = $urandom;
      b = $urandom;
      #1;
      for (int w = 0; w < NW; w++) begin
        mask = (64'd1 << WN[w]) - 1;
        x    = 64'(a) & mask;
        y    = 64'(b) & mask;
        want = ref_adder(WN[w], WH[w], WK[w], lv[w], sv[w], x, y);
        checks++;
        if (64'(res[w]) != want) begin
          failures++;
          if (failures < 20) $display("FAIL cfg%0d a=%h b=%h got=%h want=%h", w, x, y, res[w], want);
        end
        ed = longint'(x + y) - longint'(res[w]);
        total[w] += real'((ed < 0) ? -ed : ed);
      end
    end
    for (int w = 0; w < NW; w++) begin
      med = total[w] / real'(NSAMPLES);
      $display("%0d-bit H=%0d HBAA{%s,%s}: MED=%0.2f published=%0.2f%s", WN[w], WH[w],
               cfg_str(WL[w], WK[w]), cfg_str(WS[w], WK[w]), med, PAPER_MED[w], CHECKED[w] ? "" : "  (not compared)");
      if (CHECKED[w]) begin
        checks++;
        if (med < 0.98 * PAPER_MED[w] || med > 1.02 * PAPER_MED[w]) begin
          failures++;
          $display("FAIL cfg%0d MED off by more than 2%%", w);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
