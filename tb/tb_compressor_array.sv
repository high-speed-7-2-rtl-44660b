// tb_compressor_array: checks that the 7-row array is reduced to two rows
// of the same total.
// Runs the default 8-column array and a 3-column one.  For each, the seven
// rows are driven with all-zero, all-one, one-hot and random patterns, and
// sum_row + carry_row must equal the sum of the rows, computed here with
// integer additions.  Bit 0 of the carry row must be 0.  The 3-column array
// is also run exhaustively over single-column patterns.
module tb_compressor_array;
  import c72_pkg::*;

  localparam int unsigned C1 = 8;
  localparam int unsigned W1 = out_width(C1);
  localparam int unsigned C2 = 3;
  localparam int unsigned W2 = out_width(C2);

  logic [ROWS-1:0][C1-1:0] rows1;
  logic [W1-1:0]           sum1, car1;
  logic [ROWS-1:0][C2-1:0] rows2;
  logic [W2-1:0]           sum2, car2;
  int checks = 0, failures = 0;

  compressor_array dut1 (.rows(rows1), .sum_row(sum1), .carry_row(car1));
  compressor_array #(.COLS(C2)) dut2 (.rows(rows2), .sum_row(sum2), .carry_row(car2));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check;
    int exp1, exp2;
    #1;
    exp1 = 0;
    exp2 = 0;
    for (int r = 0; r < ROWS; r++) begin
      exp1 += int'(rows1[r]);
      exp2 += int'(rows2[r]);
    end
    checks++;
    if (int'(sum1) + int'(car1) != exp1 || car1[0] !== 1'b0) begin
      failures++;
      if (failures < 10) $display("FAIL 8 cols: expected %0d got %0d + %0d", exp1, sum1, car1);
    end
    checks++;
    if (int'(sum2) + int'(car2) != exp2 || car2[0] !== 1'b0) begin
      failures++;
      if (failures < 10) $display("FAIL 3 cols: expected %0d got %0d + %0d", exp2, sum2, car2);
    end
  endtask

  initial begin
    rows1 = '0; rows2 = '0; check();
    rows1 = '1; rows2 = '1; check();
    for (int r = 0; r < ROWS; r++) begin
      rows1 = '0; rows1[r] = '1;
      rows2 = '0; rows2[r] = '1;
      check();
    end
    // every pattern of 3-column rows that share one value, and every
    // single-column pattern of the 3-column array
    for (int v = 0; v < (1 << C2); v++) begin
      for (int m = 0; m < (1 << ROWS); m++) begin
        for (int r = 0; r < ROWS; r++) rows2[r] = m[r] ? C2'(v) : '0;
        rows1 = {ROWS{C1'(v * 37)}};
        check();
      end
    end
    for (int i = 0; i < 20000; i++) begin
      for (int r = 0; r < ROWS; r++) begin
        rows1[r] = C1'($urandom);
        rows2[r] = C2'($urandom);
      end
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
