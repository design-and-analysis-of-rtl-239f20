// hbaa_carry_calc -- carry calculation (CC) unit of an approximate sub-adder.
//
// In an approximate sub-adder whose carry chain is longer than its accurate
// part (H-S < L), the bits from the truncation point H-S up to L-1 produce
// their sum with OR gates, but their generate/propagate signals still feed a
// carry chain that starts from 0 at bit H-S. This unit is that chain: for W
// bits it computes c[i+1] = g[i] | (p[i] & c[i]) with c[0] = 0 and returns
// the final carry, which becomes the carry-in of the accurate bits L..H-1.
// Combinational, W AND-OR stages deep. Structure as drawn in the paper
// ("1-bit CC", "Carry Calculation and OR gates").
module hbaa_carry_calc #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         cout
);
  logic [W-1:0] g, p;
  logic [W:0]   c;

  assign g    = a & b;
  assign p    = a ^ b;
  assign c[0] = 1'b0;

  for (genvar i = 0; i < W; i++) begin : g_chain
    assign c[i+1] = g[i] | (p[i] & c[i]);
  end

  assign cout = c[W];
endmodule
