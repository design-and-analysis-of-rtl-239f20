// hbaa_rca -- W-bit ripple carry adder, the accurate building block of the
// HBAA.
//
// A chain of hbaa_full_adder cells: bit i takes the carry-out of bit i-1,
// bit 0 takes cin. It is used as a whole accurate sub-adder (W = H), as the
// S-bit accurate top of an approximate sub-adder and as the exact central part
// of an H-S > L approximate sub-adder. With DROP_COUT = 1 the most
// significant cell is an hbaa_fa_approx (exact sum, no carry) and cout is 0;
// this is how the paper builds an approximate sub-adder whose carry-out no
// other block uses. Combinational, delay grows linearly with W.
// The ripple structure is the paper's; the DROP_COUT switch is this design's
// way to select the carry-less MSB cell.
module hbaa_rca #(
  parameter int unsigned W         = 4,
  parameter bit          DROP_COUT = 1'b0
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);
  logic [W:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < W; i++) begin : g_bit
    if (DROP_COUT && i == W - 1) begin : g_msb_nocarry
      hbaa_fa_approx u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]));
      assign c[i+1] = 1'b0;
    end else begin : g_fa
      hbaa_full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
    end
  end

  assign cout = c[W];
endmodule
