// tb_sfa: checks the special full adder on the four ordered inputs.
// The expected carry/sum pairs are the rows of the ordered-input truth
// table (000 -> 00, 100 -> 01, 110 -> 10, 111 -> 11), and each is also
// compared with the arithmetic sum x + y + z.
module tb_sfa;
  logic x, y, z, carry, sum;
  int checks = 0, failures = 0;

  sfa dut (.x(x), .y(y), .z(z), .carry(carry), .sum(sum));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // {x, y, z, carry, sum}
  localparam logic [4:0] TABLE [4] = '{5'b000_00, 5'b100_01, 5'b110_10, 5'b111_11};

  initial begin
    for (int k = 0; k < 4; k++) begin
      {x, y, z} = TABLE[k][4:2];
      #1;
      checks++;
      if ({carry, sum} !== TABLE[k][1:0]) begin
        failures++;
        $display("FAIL table xyz=%b%b%b carry=%b sum=%b", x, y, z, carry, sum);
      end
      checks++;
      if (2 * int'(carry) + int'(sum) != int'(x) + int'(y) + int'(z)) begin
        failures++;
        $display("FAIL arithmetic xyz=%b%b%b", x, y, z);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
