// hbaa_adder -- N-bit Heterogeneous Block-based Approximate Adder (HBAA).
//
// The operands are cut into K = N/H disjoint H-bit sub-adders. Sub-adders
// 0..NUM_APPROX-1 (the least significant ones) are approximate: sub-adder i
// is an hbaa_approx_block with L_VEC[i] OR-gate bits and a carry chain of
// S_VEC[i] bits, and its configuration may differ from its neighbours'
// (hence "heterogeneous"). Approximate sub-adders take no carry-in. Only the
// most significant approximate sub-adder passes its carry-out on; the others
// drop it (their top cell is the carry-less FA_Approx/HA_Approx). Sub-adders
// NUM_APPROX..K-1 are accurate H-bit ripple carry adders chained one to the
// next, the first fed by that carry (or by 0 when there is no approximate
// sub-adder). The last carry-out is sum[N].
//
// The configuration is written as HBAA{[L_1..L_k],[S_1..S_k]}, least
// significant sub-adder first. Defaults: the paper's drawn 16-bit example
// with 4-bit sub-adders, HBAA{[3,2],[1,2]} -- sub-adder 1 has three OR bits
// and a one-bit carry chain (a half adder whose carry is dropped), sub-adder
// 2 has two OR bits and a 2-bit RCA whose carry feeds sub-adders 3 and 4.
//
// Interface: a, b are N bits, sum is N+1 bits (sum[N] is the carry-out). No
// clock: the whole adder is combinational. The structure is the paper's; the
// requirement that N be a multiple of H and the MAX_BLOCKS bound on the
// configuration vectors are this design's choices.
module hbaa_adder
  import hbaa_pkg::*;
#(
  parameter int unsigned N          = 16,
  parameter int unsigned H          = 4,
  parameter int unsigned NUM_APPROX = 2,
  parameter cfg_vec_t    L_VEC      = '{0: 3, 1: 2, default: 0},
  parameter cfg_vec_t    S_VEC      = '{0: 1, 1: 2, default: 0}
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N:0]   sum
);
  localparam int unsigned K = N / H;

  initial begin
    assert (adder_cfg_ok(N, H, NUM_APPROX, L_VEC, S_VEC))
      else $fatal(1, "hbaa_adder: illegal configuration N=%0d H=%0d NUM_APPROX=%0d", N, H, NUM_APPROX);
  end

  // carry[j] is the carry into sub-adder j; only the accurate sub-adders use
  // it. The adder itself has no carry-in.
  logic [K:0] carry;

  assign carry[0] = 1'b0;

  for (genvar j = 0; j < K; j++) begin : g_blk
    if (j < NUM_APPROX) begin : g_approx
      logic co;
      hbaa_approx_block #(
        .H(H), .L(L_VEC[j]), .S(S_VEC[j]), .COUT_USED(j == NUM_APPROX - 1)
      ) u_blk (
        .a(a[j*H +: H]), .b(b[j*H +: H]), .sum(sum[j*H +: H]), .cout(co));
      // Carries of the lower approximate sub-adders go nowhere (they are 0).
      assign carry[j+1] = (j == NUM_APPROX - 1) ? co : 1'b0;
    end else begin : g_accurate
      hbaa_rca #(.W(H), .DROP_COUT(1'b0)) u_blk (
        .a(a[j*H +: H]), .b(b[j*H +: H]), .cin(carry[j]),
        .sum(sum[j*H +: H]), .cout(carry[j+1]));
    end
  end

  assign sum[N] = carry[K];
endmodule
