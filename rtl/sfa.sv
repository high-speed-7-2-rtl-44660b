// sfa: special full adder for three bits that are already ordered.
//
// When X >= Y >= Z only four input patterns can occur: 000, 100, 110, 111.
// Their two-bit sums are 0, 1, 2, 3, so the carry equals Y and the sum is
// X & (~Y | Z).  The carry therefore costs no gate at all after the sorter
// that produced Y, and the sum costs two gate stages; an ordinary full adder
// needs three stages for its carry.
//
// Interface: x, y, z (x >= y >= z required) -> carry, sum with
// x + y + z = 2*carry + sum.
// Timing: purely combinational; carry is a wire, sum two gate stages.
// Because carry is y itself, synthesis reports see an output wired
// straight to an input; that is the point of the block, not an omission.
// For unordered inputs the outputs are those of the same two equations and
// are not a sum; the compressor only ever feeds it ordered bits.
module sfa (
  input  logic x,
  input  logic y,
  input  logic z,
  output logic carry,
  output logic sum
);

  assign carry = y;
  assign sum   = x & (~y | z);

endmodule
