// tb_hbaa_fa_approx -- exhaustive check of the carry-less MSB cell against the
// FA_Approx truth table (rows a,b,cin -> sum, error value) and the HA_Approx
// table (cin = 0). The error value is (a+b+cin) - sum, which must be 2 exactly
// in the rows where the dropped carry would have been 1.
`timescale 1ns/1ps
module tb_hbaa_fa_approx;
  logic a, b, cin, sum;
  int checks = 0, failures = 0;
  int err2_fa = 0, err2_ha = 0;

  hbaa_fa_approx dut (.a(a), .b(b), .cin(cin), .sum(sum));

  // FA_Approx rows as printed: {a,b,cin} -> {sum, error value}
  localparam logic [2:0] ROW_IN  [8] = '{3'b000, 3'b010, 3'b100, 3'b110, 3'b001, 3'b011, 3'b101, 3'b111};
  localparam logic       ROW_SUM [8] = '{1'b0, 1'b1, 1'b1, 1'b0, 1'b1, 1'b0, 1'b0, 1'b1};
  localparam int         ROW_ERR [8] = '{0, 0, 0, 2, 0, 2, 2, 2};

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 8; r++) begin
      {a, b, cin} = ROW_IN[r];
      #1;
      checks++;
      if (sum !== ROW_SUM[r] || (int'(a) + int'(b) + int'(cin) - int'(sum)) != ROW_ERR[r]) begin
        failures++;
        $display("FAIL a=%0d b=%0d cin=%0d sum=%0d", a, b, cin, sum);
      end
      if (ROW_ERR[r] != 0) begin
        err2_fa++;
        if (cin == 1'b0) err2_ha++;
      end
    end
    // Uniform inputs: error 2^H with probability 1/2 (FA) and 1/4 (HA).
    checks++;
    if (err2_fa != 4 || err2_ha != 1) begin
      failures++;
      $display("FAIL error counts fa=%0d ha=%0d", err2_fa, err2_ha);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
