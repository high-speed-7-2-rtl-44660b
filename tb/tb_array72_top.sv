// tb_array72_top: end-to-end test of the 7 x 8 array summer at its default
// size (8 columns, 11-bit total).
// Each pattern's total is compared with the sum of the seven rows computed
// with integer additions.  Patterns: all zeros, all ones (the largest total,
// 7 * 255), one full row, single bits, and random arrays.
// The test also counts how often each mechanism of the compressor array is
// exercised, and fails if one never is:
//   - each of the four column carry-outs Co1..Co4 being 1 somewhere,
//   - carries from the top array column reaching the zero-input columns
//     above it,
//   - the merge adder carrying across at least 8 bit positions.
module tb_array72_top;
  import c72_pkg::*;

  localparam int unsigned COLS  = 8;
  localparam int unsigned OUT_W = out_width(COLS);

  logic [ROWS-1:0][COLS-1:0] rows;
  logic [OUT_W-1:0]          total;
  int checks = 0, failures = 0;
  int n_co [4];
  int n_ext_carry = 0;
  int n_long_carry = 0;

  array72_top dut (.rows(rows), .total(total));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Longest run of consecutive carries in a + b.
  function automatic int carry_run(input logic [OUT_W-1:0] a, input logic [OUT_W-1:0] b);
    logic c = 1'b0;
    int run = 0, best = 0;
    for (int i = 0; i < OUT_W; i++) begin
      c = (a[i] & b[i]) | (c & (a[i] ^ b[i]));
      run = c ? run + 1 : 0;
      if (run > best) best = run;
    end
    return best;
  endfunction

  task automatic check;
    int expd;
    carry4_t top_co;
    #1;
    expd = 0;
    for (int r = 0; r < ROWS; r++) expd += int'(rows[r]);
    checks++;
    if (int'(total) != expd) begin
      failures++;
      if (failures < 10) $display("FAIL expected %0d got %0d", expd, total);
    end
    for (int i = 0; i < OUT_W; i++) begin
      if (dut.u_array.chain[i+1].c1) n_co[0]++;
      if (dut.u_array.chain[i+1].c2) n_co[1]++;
      if (dut.u_array.chain[i+1].c3) n_co[2]++;
      if (dut.u_array.chain[i+1].c4) n_co[3]++;
    end
    top_co = dut.u_array.chain[COLS];
    if (top_co != '0) n_ext_carry++;
    if (carry_run(dut.sum_row, dut.carry_row) >= 8) n_long_carry++;
  endtask

  initial begin
    foreach (n_co[k]) n_co[k] = 0;
    rows = '0; check();
    rows = '1; check();
    for (int r = 0; r < ROWS; r++) begin
      rows = '0; rows[r] = '1; check();
      for (int b = 0; b < COLS; b++) begin
        rows = '0; rows[r][b] = 1'b1; check();
      end
    end
    for (int i = 0; i < 50000; i++) begin
      for (int r = 0; r < ROWS; r++) rows[r] = COLS'($urandom);
      check();
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (n_co[k] == 0) begin
        failures++;
        $display("FAIL carry-out Co%0d never asserted", k + 1);
      end
    end
    checks++;
    if (n_ext_carry == 0) begin
      failures++;
      $display("FAIL no carry ever left the top array column");
    end
    checks++;
    if (n_long_carry == 0) begin
      failures++;
      $display("FAIL merge adder never carried across 8 bits");
    end
    $display("Co1..Co4 asserted: %0d %0d %0d %0d; top-column carries: %0d; long merge carries: %0d",
             n_co[0], n_co[1], n_co[2], n_co[3], n_ext_carry, n_long_carry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
