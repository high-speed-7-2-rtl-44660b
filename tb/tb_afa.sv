// tb_afa: exhaustive check of the adjusted full adder.
// For all eight inputs, 2*carry + sum must equal a + b + c.
module tb_afa;
  logic a, b, c, carry, sum;
  int checks = 0, failures = 0;

  afa dut (.a(a), .b(b), .c(c), .carry(carry), .sum(sum));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      checks++;
      if (2 * int'(carry) + int'(sum) != int'(a) + int'(b) + int'(c)) begin
        failures++;
        $display("FAIL abc=%b%b%b carry=%b sum=%b", a, b, c, carry, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
