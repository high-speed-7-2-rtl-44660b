// tb_sorter2: exhaustive check of the two-bit sorter.
// All four input pairs are applied; out1 must be the larger bit and out2
// the smaller one, computed here with a comparison.
module tb_sorter2;
  logic in1, in2, out1, out2;
  int checks = 0, failures = 0;

  sorter2 dut (.in1(in1), .in2(in2), .out1(out1), .out2(out2));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {in1, in2} = 2'(v);
      #1;
      checks++;
      if (out1 !== ((in1 > in2) ? in1 : in2) || out2 !== ((in1 > in2) ? in2 : in1)) begin
        failures++;
        $display("FAIL in1=%b in2=%b out1=%b out2=%b", in1, in2, out1, out2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
