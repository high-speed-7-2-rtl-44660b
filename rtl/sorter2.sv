// sorter2: sorts two 1-bit numbers.
//
// The larger of the two bits is their OR and the smaller is their AND, so
// one OR gate and one AND gate sort a pair in a single gate stage.  This is
// the comparator used in every position of the sorting network (half_sort).
//
// Interface: in1, in2 -> out1 (larger, in1 | in2), out2 (smaller, in1 & in2).
// Timing: purely combinational, one gate stage.
// The gate pair follows the paper's two-bit sorter exactly.
module sorter2 (
  input  logic in1,
  input  logic in2,
  output logic out1,
  output logic out2
);

  assign out1 = in1 | in2;
  assign out2 = in1 & in2;

endmodule
