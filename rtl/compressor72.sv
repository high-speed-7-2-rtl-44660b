// compressor72: one column of a (7,2) compressor built from a half sorter,
// a special full adder and four adjusted full adders.
//
// Seven bits of one weight (in_bits) and four carry-ins from the column
// below (ci.c1..ci.c4) are reduced to one sum bit of this weight and five
// bits of the next weight (carry and co.c1..co.c4):
//   popcount(in_bits) + popcount(ci) = sum + 2*(carry + popcount(co)).
//
// Structure, with the gate-stage arrival time of each signal in brackets:
//   In5..In7 (in_bits[4..6]) -> afa FA2 (C = In7)  -> Co2[3], S2[4]
//   In1..In4 (in_bits[0..3]) -> half_sort[2]: outputs 1,2,4 are ordered
//                               -> sfa (X,Y,Z)      -> Co1[2], S1[4]
//   half_sort output 3, Ci1[2], Ci2[3]
//                            -> afa FA3 (C = Ci2)  -> Co3[5], S3[6]
//   S2[4], S1[4], Ci3[5]     -> afa FA4 (C = Ci3)  -> Co4[7], S4[8]
//   S3[6], Ci4[7], S4[8]     -> afa FA5 (C = S4)   -> carry[10], sum[11]
// Each adjusted full adder takes its slowest signal on the C input, which
// may arrive two stages late.  Because the SFA carry Co1 is ready after two
// stages, the matching Ci1 (and Ci2 one stage later) can join at the bottom
// adder, and the column needs 11 gate stages from In to Sum.  Co_k of a
// column is meant for Ci_k of the next-higher column: the arrival times of
// each pair match.
//
// Timing: purely combinational.
// The adder network, its wiring and the choice of C inputs follow the
// paper's compressor diagram; for the middle adder (FA4) the C input is
// chosen so that the printed stage numbers hold.  The In5..In7 naming and
// the bit order of in_bits are this design's choice.
module compressor72
  import c72_pkg::*;
(
  input  logic [ROWS-1:0] in_bits,
  input  carry4_t         ci,
  output carry4_t         co,
  output logic            sum,
  output logic            carry
);

  logic [3:0] hs;          // half-sorted In1..In4; hs[0] largest, hs[3] smallest
  logic       s1, s2, s3, s4;

  // Top adder: the three inputs that do not go through the sorter.
  afa u_fa2 (.a(in_bits[4]), .b(in_bits[5]), .c(in_bits[6]),
             .carry(co.c2), .sum(s2));

  half_sort u_hs (.in_bits(in_bits[3:0]), .out_bits(hs));

  // Ordered triple: largest, one middle bit, smallest.
  sfa u_sfa (.x(hs[0]), .y(hs[1]), .z(hs[3]), .carry(co.c1), .sum(s1));

  // The other middle bit with the two fastest carry-ins.
  afa u_fa3 (.a(hs[2]), .b(ci.c1), .c(ci.c2), .carry(co.c3), .sum(s3));

  afa u_fa4 (.a(s2), .b(s1), .c(ci.c3), .carry(co.c4), .sum(s4));

  afa u_fa5 (.a(s3), .b(ci.c4), .c(s4), .carry(carry), .sum(sum));

endmodule
