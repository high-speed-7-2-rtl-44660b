// tb_ks_adder: checks the Kogge-Stone adder at its default width (11 bits)
// and at 16 bits against the + operator, on corner cases (all-ones
// operands, full-length carry ripple) and random operands.
module tb_ks_adder;
  localparam int unsigned W1 = 11;
  localparam int unsigned W2 = 16;

  logic [W1-1:0] a1, b1, s1;
  logic [W2-1:0] a2, b2, s2;
  logic          c1, c2;
  int checks = 0, failures = 0;

  ks_adder           dut1 (.a(a1), .b(b1), .s(s1), .cout(c1));
  ks_adder #(.W(W2)) dut2 (.a(a2), .b(b2), .s(s2), .cout(c2));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [W2-1:0] x, input logic [W2-1:0] y);
    a1 = x[W1-1:0]; b1 = y[W1-1:0];
    a2 = x;         b2 = y;
    #1;
    checks++;
    if ({c1, s1} !== {1'b0, a1} + {1'b0, b1}) begin
      failures++;
      if (failures < 10) $display("FAIL W=%0d %h + %h = %b_%h", W1, a1, b1, c1, s1);
    end
    checks++;
    if ({c2, s2} !== {1'b0, a2} + {1'b0, b2}) begin
      failures++;
      if (failures < 10) $display("FAIL W=%0d %h + %h = %b_%h", W2, a2, b2, c2, s2);
    end
  endtask

  initial begin
    apply('0, '0);
    apply('1, '1);
    apply('1, 16'd1);
    apply(16'd1, '1);
    for (int i = 0; i < W2; i++) apply(16'(1) << i, 16'(1) << i);
    for (int i = 0; i < 20000; i++) apply(16'($urandom), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
