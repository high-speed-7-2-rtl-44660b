// tb_half_sort: exhaustive check of the two-stage half sorter.
// For all 16 inputs: the number of ones is kept, output 0 is the maximum,
// output 3 the minimum, and outputs 1 and 2 lie between them; and the
// outputs equal the fully sorted vector except that the two middle bits
// may be swapped.
module tb_half_sort;
  logic [3:0] in_bits, out_bits;
  int checks = 0, failures = 0;

  half_sort dut (.in_bits(in_bits), .out_bits(out_bits));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    logic [3:0] sorted;
    for (int v = 0; v < 16; v++) begin
      in_bits = 4'(v);
      #1;
      ones = $countones(in_bits);
      // fully sorted, largest at index 0
      sorted = '0;
      for (int k = 0; k < ones; k++) sorted[k] = 1'b1;
      checks++;
      if ($countones(out_bits) != ones) begin
        failures++;
        $display("FAIL count in=%b out=%b", in_bits, out_bits);
      end
      checks++;
      if (out_bits[0] !== sorted[0] || out_bits[3] !== sorted[3]) begin
        failures++;
        $display("FAIL ends in=%b out=%b", in_bits, out_bits);
      end
      checks++;
      if (out_bits[1] > out_bits[0] || out_bits[2] > out_bits[0] ||
          out_bits[1] < out_bits[3] || out_bits[2] < out_bits[3]) begin
        failures++;
        $display("FAIL middle in=%b out=%b", in_bits, out_bits);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
