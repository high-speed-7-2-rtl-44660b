// half_sort: the first two stages of a 4-input bit-sorting network.
//
// A full 4-input network sorts with three stages of sorter2 comparators:
// (A,B),(C,D), then (A,C),(B,D), then (B,C).  The last stage only orders the
// two middle bits, so after the first two stages out_bits[0] is already the
// largest of the four and out_bits[3] the smallest; out_bits[1] and
// out_bits[2] hold the two middle values in either order.  Any middle bit
// then forms, with the top and bottom bits, an ordered triple X >= Y >= Z,
// which the special full adder (sfa) can add in two gate stages.  The number
// of ones is unchanged.
//
// Interface: in_bits[0..3] = A..D; out_bits[0..3] = A'..D'.
// Timing: purely combinational, two gate stages (one per sorter column).
// The comparator positions follow the paper's network; the bit order on the
// ports (index 0 = A, largest at the output) is this design's choice.
module half_sort (
  input  logic [3:0] in_bits,
  output logic [3:0] out_bits
);

  logic [3:0] s1;   // after the first sorter stage

  // Stage 1: (A,B) and (C,D)
  sorter2 u_ab (.in1(in_bits[0]), .in2(in_bits[1]), .out1(s1[0]), .out2(s1[1]));
  sorter2 u_cd (.in1(in_bits[2]), .in2(in_bits[3]), .out1(s1[2]), .out2(s1[3]));

  // Stage 2: (A,C) and (B,D)
  sorter2 u_ac (.in1(s1[0]), .in2(s1[2]), .out1(out_bits[0]), .out2(out_bits[2]));
  sorter2 u_bd (.in1(s1[1]), .in2(s1[3]), .out1(out_bits[1]), .out2(out_bits[3]));

endmodule
