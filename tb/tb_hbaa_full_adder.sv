// tb_hbaa_full_adder -- exhaustive check of the accurate full adder against
// the "Accurate FA" columns of the LPAA truth table (sum and carry of a+b+cin).
`timescale 1ns/1ps
module tb_hbaa_full_adder;
  logic a, b, cin, sum, cout;
  int checks = 0, failures = 0;

  hbaa_full_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  // Accurate FA rows, index {a,b,cin}: {sum,cout}
  localparam logic [1:0] TABLE [8] = '{2'b00, 2'b10, 2'b10, 2'b01, 2'b10, 2'b01, 2'b01, 2'b11};

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      checks++;
      if ({sum, cout} !== TABLE[v] || {cout, sum} !== 2'(a + b + cin)) begin
        failures++;
        $display("FAIL a=%0d b=%0d cin=%0d -> sum=%0d cout=%0d", a, b, cin, sum, cout);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
