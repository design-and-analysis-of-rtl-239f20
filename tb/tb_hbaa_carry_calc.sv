// tb_hbaa_carry_calc -- exhaustive check of the carry calculation unit at
// widths 1, 2 and 3: its output must equal the carry of a + b with carry-in 0.
`timescale 1ns/1ps
module tb_hbaa_carry_calc;
  logic [2:0] a, b;
  logic       c1, c2, c3;
  int checks = 0, failures = 0, ones = 0;

  hbaa_carry_calc #(.W(1)) dut1 (.a(a[0:0]), .b(b[0:0]), .cout(c1));
  hbaa_carry_calc #(.W(2)) dut2 (.a(a[1:0]), .b(b[1:0]), .cout(c2));
  hbaa_carry_calc #(.W(3)) dut3 (.a(a),      .b(b),      .cout(c3));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      {a, b} = 6'(v);
      #1;
      checks += 3;
      if (c1 !== 1'((int'(a[0]) + int'(b[0])) >> 1))     begin failures++; $display("FAIL W=1 a=%0d b=%0d", a[0], b[0]); end
      if (c2 !== 1'((int'(a[1:0]) + int'(b[1:0])) >> 2)) begin failures++; $display("FAIL W=2 a=%0d b=%0d", a[1:0], b[1:0]); end
      if (c3 !== 1'((int'(a) + int'(b)) >> 3))           begin failures++; $display("FAIL W=3 a=%0d b=%0d", a, b); end
      ones += int'(c3);
    end
    // Paper's Pr(G1) for n = 3: sum of P_Z(j;3) for j = 8..14 = 28/64.
    checks++;
    if (ones != 28) begin failures++; $display("FAIL W=3 generate count %0d, want 28", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
