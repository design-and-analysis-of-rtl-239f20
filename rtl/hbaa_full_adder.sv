// hbaa_full_adder -- accurate one-bit full adder of the HBAA.
//
// Written in the generate/propagate form the paper uses for its ripple carry
// adders: g = a & b, p = a ^ b, sum = p ^ cin, cout = g | (p & cin).
// Purely combinational; no clock. The structure follows the paper's carry
// equation; the module boundary is this design's choice.
module hbaa_full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  logic g, p;

  always_comb begin
    g    = a & b;
    p    = a ^ b;
    sum  = p ^ cin;
    cout = g | (p & cin);
  end
endmodule
