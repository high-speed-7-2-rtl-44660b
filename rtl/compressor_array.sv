// compressor_array: reduces a binary array of 7 rows to 2 rows with one
// (7,2) compressor per column.
//
// The 7 rows are COLS bits wide and aligned (all start at weight 2^0).
// Column i holds bit i of every row; its compressor passes its four
// carry-outs to the carry-ins of column i+1, and column 0 gets zero
// carry-ins.  The carry-outs of the top array column still carry weight,
// so OUT_W - COLS further compressors with all-zero inputs sit above it and
// absorb them; OUT_W bits are enough for the whole sum, so the carries that
// leave the last of them are always zero.  The result is two rows whose sum
// equals the sum of the seven input rows:
//   sum_row   bit i   = Sum   of column i
//   carry_row bit i+1 = Carry of column i (bit 0 is 0)
//
// carry_row[0] is always 0, and after constant propagation a few outputs
// of the zero-input columns are constant as well.
//
// Timing: purely combinational.  Each column's Sum is 11 gate stages after
// its own inputs; the carry chain between columns does not lengthen this,
// since each Ci_k arrives when it is needed.
// The per-column compressor is the paper's; the zero-input top columns and
// the row alignment are this design's choices.
module compressor_array
  import c72_pkg::*;
#(
  parameter int unsigned COLS  = 8,
  parameter int unsigned OUT_W = out_width(COLS)
) (
  input  logic [ROWS-1:0][COLS-1:0] rows,
  output logic [OUT_W-1:0]          sum_row,
  output logic [OUT_W-1:0]          carry_row
);

  carry4_t [OUT_W:0]   chain;    // chain[i] = carry-ins of column i
  logic    [OUT_W-1:0] col_carry;

  assign chain[0] = '0;

  for (genvar i = 0; i < OUT_W; i++) begin : g_col
    logic [ROWS-1:0] col_bits;
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      if (i < COLS) begin : g_in
        assign col_bits[r] = rows[r][i];
      end else begin : g_zero
        assign col_bits[r] = 1'b0;
      end
    end

    compressor72 u_c72 (
      .in_bits(col_bits),
      .ci     (chain[i]),
      .co     (chain[i+1]),
      .sum    (sum_row[i]),
      .carry  (col_carry[i])
    );
  end

  // Carry of column i has the weight of column i+1; the one leaving the
  // top column is zero because the total fits in OUT_W bits.
  assign carry_row = {col_carry[OUT_W-2:0], 1'b0};

  // Nothing may leave the top column: the total fits in OUT_W bits.
  always_comb begin
    assert (chain[OUT_W] == '0 && col_carry[OUT_W-1] == 1'b0)
      else $error("compressor_array: carry out of the top column");
  end

endmodule
