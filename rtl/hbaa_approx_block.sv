// hbaa_approx_block -- one H-bit approximate sub-adder of the HBAA.
//
// Two approximations are combined in one block:
//   * inexact logic: the sum of the L least significant bits is a | b (an OR
//     gate replaces the full adder; the bit is wrong by 2^i when a & b);
//   * carry truncation: the carry chain is S bits long and starts from a
//     forced 0 at bit T = H-S, so any carry out of bits 0..T-1 is lost.
// How the two parts meet gives three structures (all from the paper):
//   H-S > L : OR bits [0,L) | exact RCA [L,T) whose carry-out is dropped
//             (half adder at bit L, full adders above) | S-bit RCA [T,H)
//             with carry-in 0.
//   H-S = L : OR bits [0,L) | S-bit RCA [L,H) with carry-in 0.
//   H-S < L : OR bits [0,T) with no carry | OR bits [T,L) whose g/p feed a
//             carry calculation unit starting from 0 | RCA [L,H) whose
//             carry-in is that unit's result.
// cout is the carry of the S-bit chain. When COUT_USED = 0 (the block is not
// the most significant approximate block, so nothing reads its carry) the
// most significant cell is the carry-less FA_Approx/HA_Approx and cout = 0.
// S = 0 means there is no carry chain at all and cout = 0.
//
// Interface: a, b, sum are H bits; the block has no carry-in (sub-adders are
// disjoint). Purely combinational; the longest path is about 2*max(S, H-S-L)
// gate levels, as the paper's delay model states.
module hbaa_approx_block
  import hbaa_pkg::*;
#(
  parameter int unsigned H         = 4,
  parameter int unsigned L         = 2,
  parameter int unsigned S         = 2,
  parameter bit          COUT_USED = 1'b1
) (
  input  logic [H-1:0] a,
  input  logic [H-1:0] b,
  output logic [H-1:0] sum,
  output logic         cout
);
  localparam int unsigned T = H - S;                 // carry-chain truncation point
  localparam int unsigned L1 = (L < T) ? L : T;      // OR bits with no carry (segment 1)
  localparam blk_case_e   CASE = block_case(H, L, S);

  initial begin
    assert (block_cfg_ok(H, L, S))
      else $fatal(1, "hbaa_approx_block: need L <= H and S <= H (H=%0d L=%0d S=%0d)", H, L, S);
  end

  // Segment 1: OR-gate sum bits that pass no carry upward.
  if (L1 > 0) begin : g_or_lo
    assign sum[L1-1:0] = a[L1-1:0] | b[L1-1:0];
  end

  if (CASE == CASE_TRUNC_LT_OR) begin : g_lt
    // Segment 2: OR-gate sum bits [T,L) whose generate/propagate build the carry.
    assign sum[L-1:T] = a[L-1:T] | b[L-1:T];
    if (H > L) begin : g_acc
      // Segment 3: accurate RCA [L,H) fed by the carry calculation unit.
      logic cc, co;
      hbaa_carry_calc #(.W(L - T)) u_cc (.a(a[L-1:T]), .b(b[L-1:T]), .cout(cc));
      hbaa_rca #(.W(H - L), .DROP_COUT(!COUT_USED)) u_rca (
        .a(a[H-1:L]), .b(b[H-1:L]), .cin(cc), .sum(sum[H-1:L]), .cout(co));
      assign cout = COUT_USED ? co : 1'b0;
    end else if (COUT_USED) begin : g_all_or_cout
      // L = H: every sum bit is an OR gate; the carry unit only drives cout.
      hbaa_carry_calc #(.W(L - T)) u_cc (.a(a[L-1:T]), .b(b[L-1:T]), .cout(cout));
    end else begin : g_all_or
      assign cout = 1'b0;
    end
  end else begin : g_ge
    // H-S >= L: exact central part [L,T) (empty when H-S = L), then S-bit RCA.
    if (T > L) begin : g_central
      logic unused_co;
      hbaa_rca #(.W(T - L), .DROP_COUT(1'b1)) u_central (
        .a(a[T-1:L]), .b(b[T-1:L]), .cin(1'b0), .sum(sum[T-1:L]), .cout(unused_co));
    end
    if (S > 0) begin : g_top
      logic co;
      hbaa_rca #(.W(S), .DROP_COUT(!COUT_USED)) u_rca (
        .a(a[H-1:T]), .b(b[H-1:T]), .cin(1'b0), .sum(sum[H-1:T]), .cout(co));
      assign cout = COUT_USED ? co : 1'b0;
    end else begin : g_no_chain
      assign cout = 1'b0;
    end
  end
endmodule
