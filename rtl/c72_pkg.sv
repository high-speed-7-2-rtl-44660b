// c72_pkg: types and constants shared by the (7,2) compressor blocks.
//
// A (7,2) compressor column takes seven bits of one weight plus four
// carry-in bits from the column below, and hands four carry-out bits to the
// column above.  The four carries always travel together, so they are kept
// in one packed struct, carry4_t.  Member k (c1..c4) is the carry of the
// k-th adder in the column; the stage numbers printed in the compressor
// diagram pair Co_k with Ci_k of the next column (Co1/Ci1 at 2 gate stages,
// Co2/Ci2 at 3, Co3/Ci3 at 5, Co4/Ci4 at 7).
package c72_pkg;

  // Rows compressed by one (7,2) compressor.
  localparam int unsigned ROWS = 7;

  // Co1..Co4 (or Ci1..Ci4).  c1 is the fastest, c4 the slowest.
  typedef struct packed {
    logic c4;
    logic c3;
    logic c2;
    logic c1;
  } carry4_t;

  // Width that holds the sum of ROWS rows of `cols` bits each:
  // 7 * (2^cols - 1) < 2^(cols + 3).
  function automatic int unsigned out_width(input int unsigned cols);
    return cols + 3;
  endfunction

endpackage
