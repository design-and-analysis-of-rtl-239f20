// hbaa_fa_approx -- most significant cell of an approximate sub-adder whose
// carry-out is thrown away (the paper's FA_Approx; with cin tied to 0 it is
// HA_Approx).
//
// It produces the exact sum bit a ^ b ^ cin but no carry-out: the carry that
// a full adder would pass upward is dropped, which costs an error of 2^H
// whenever that carry would have been 1 (Tables "HA_Approx"/"FA_Approx":
// probability 1/4 for the half adder, 1/2 for the full adder, under uniform
// inputs). Combinational, no clock. The truth table is the paper's.
module hbaa_fa_approx (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum
);
  always_comb sum = a ^ b ^ cin;
endmodule
