// tb_hbaa_rca -- exhaustive check of the ripple carry adder at W = 4 and
// W = 1, and of the W = 4 variant whose most significant cell drops its carry.
`timescale 1ns/1ps
module tb_hbaa_rca;
  logic [3:0] a, b, s4, s4d;
  logic [0:0] a1, b1, s1;
  logic       cin, c4, c4d, c1;
  int checks = 0, failures = 0;

  hbaa_rca #(.W(4))                    dut4  (.a(a),  .b(b),  .cin(cin), .sum(s4),  .cout(c4));
  hbaa_rca #(.W(4), .DROP_COUT(1'b1))  dut4d (.a(a),  .b(b),  .cin(cin), .sum(s4d), .cout(c4d));
  hbaa_rca #(.W(1))                    dut1  (.a(a1), .b(b1), .cin(cin), .sum(s1),  .cout(c1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      {cin, a, b} = 9'(v);
      a1 = a[0];
      b1 = b[0];
      #1;
      checks += 3;
      if ({c4, s4} !== 5'(a + b + cin)) begin
        failures++;
        $display("FAIL W=4 a=%0d b=%0d cin=%0d -> %0d", a, b, cin, {c4, s4});
      end
      if (s4d !== 4'(a + b + cin) || c4d !== 1'b0) begin
        failures++;
        $display("FAIL W=4 drop a=%0d b=%0d cin=%0d -> %0d", a, b, cin, {c4d, s4d});
      end
      if ({c1, s1} !== 2'(a1 + b1 + cin)) begin
        failures++;
        $display("FAIL W=1 a=%0d b=%0d cin=%0d", a1, b1, cin);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
