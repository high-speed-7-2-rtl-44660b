// array72_top: sums a binary array of 7 rows and COLS columns with (7,2)
// compressors and a Kogge-Stone merge adder.
//
// This is the circuit in which the compressor is measured: the 7 rows are
// reduced to a sum row and a carry row by compressor_array (one
// sorting-network-based (7,2) compressor per column), and ks_adder adds the
// two rows into the final total, as in the reduction and final-addition
// steps of a multiplier.
//
// Interface: rows[r] is row r (COLS bits, all aligned at weight 1);
// total = rows[0] + ... + rows[6], OUT_W = COLS + 3 bits wide.
// Timing: purely combinational, no clock or reset; 11 gate stages through
// the compressors plus the prefix adder.
// The 7 x 8 array and the Kogge-Stone merge follow the paper; the array
// alignment, the extra zero-input columns and the widths are this design's
// choices.
module array72_top
  import c72_pkg::*;
#(
  parameter int unsigned COLS  = 8,
  parameter int unsigned OUT_W = out_width(COLS)
) (
  input  logic [ROWS-1:0][COLS-1:0] rows,
  output logic [OUT_W-1:0]          total
);

  logic [OUT_W-1:0] sum_row, carry_row;
  logic             merge_cout;   // always 0: the total fits in OUT_W bits

  compressor_array #(.COLS(COLS), .OUT_W(OUT_W)) u_array (
    .rows     (rows),
    .sum_row  (sum_row),
    .carry_row(carry_row)
  );

  ks_adder #(.W(OUT_W)) u_merge (
    .a   (sum_row),
    .b   (carry_row),
    .s   (total),
    .cout(merge_cout)
  );

  always_comb begin
    assert (merge_cout == 1'b0)
      else $error("array72_top: merge adder overflow");
  end

endmodule
