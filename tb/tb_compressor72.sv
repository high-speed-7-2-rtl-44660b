// tb_compressor72: exhaustive check of one (7,2) compressor column.
// All 2^11 combinations of the seven inputs and four carry-ins are applied.
// The value must be kept:
//   ones(in_bits) + ones(ci) == sum + 2 * (carry + ones(co)),
// and each carry-out must depend only on the column's own inputs and on
// faster carry-ins (Co1, Co2 on none, Co3 on Ci1..Ci2, Co4 on Ci1..Ci3), so
// that chaining columns never ripples; this is checked by toggling the
// carry-ins from Ci4 downwards and requiring the carry-outs to stay put.
// It also checks that the special full adder inside only ever receives
// ordered bits (X >= Y >= Z), the condition its equations rely on.
module tb_compressor72;
  import c72_pkg::*;

  logic [ROWS-1:0] in_bits;
  carry4_t         ci, co;
  logic            sum, carry;
  int checks = 0, failures = 0;

  compressor72 dut (.in_bits(in_bits), .ci(ci), .co(co), .sum(sum), .carry(carry));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lhs, rhs;
    carry4_t co_ref;
    for (int v = 0; v < (1 << 11); v++) begin
      {ci, in_bits} = 11'(v);
      #1;
      lhs = $countones(in_bits) + $countones(ci);
      rhs = int'(sum) + 2 * (int'(carry) + $countones(co));
      checks++;
      if (lhs != rhs) begin
        failures++;
        if (failures < 10)
          $display("FAIL in=%b ci=%b -> sum=%b carry=%b co=%b", in_bits, ci, sum, carry, co);
      end
      // The special full adder must only ever see ordered bits.
      checks++;
      if (dut.u_sfa.x < dut.u_sfa.y || dut.u_sfa.y < dut.u_sfa.z) begin
        failures++;
        if (failures < 10) $display("FAIL SFA inputs not ordered for in=%b", in_bits);
      end
      // Co1, Co2 depend on no carry-in, Co3 only on Ci1 and Ci2, and Co4
      // only on Ci1..Ci3.
      co_ref = co;
      ci.c4 = ~ci.c4;
      #1;
      checks++;
      if (co !== co_ref) begin
        failures++;
        if (failures < 10) $display("FAIL a carry-out depends on Ci4");
      end
      ci.c3 = ~ci.c3;
      #1;
      checks++;
      if (co.c1 !== co_ref.c1 || co.c2 !== co_ref.c2 || co.c3 !== co_ref.c3) begin
        failures++;
        if (failures < 10) $display("FAIL Co1..Co3 depend on Ci3");
      end
      ci.c2 = ~ci.c2;
      ci.c1 = ~ci.c1;
      #1;
      checks++;
      if (co.c1 !== co_ref.c1 || co.c2 !== co_ref.c2) begin
        failures++;
        if (failures < 10) $display("FAIL Co1, Co2 depend on a carry-in");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
