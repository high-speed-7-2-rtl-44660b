// afa: adjusted full adder with a late C input.
//
// The adder is written so that A and B are combined first and C enters only
// in the last gates:
//   h1    = A | B             (OR)
//   h2_n  = ~(A & B)          (NAND)
//   carry = (C & h1) | ~h2_n  = C(A+B) + AB
//   p     = h1 & h2_n         = A ^ B
//   sum   = C ? ~p : p        = A ^ B ^ C   (2:1 multiplexer, C selects)
// A and B reach sum through four gate stages (counting the multiplexer as
// two), C through only two, and C also reaches carry through two.  C may
// therefore arrive two gate stages after A and B without delaying either
// output, which the (7,2) compressor uses to absorb its late signals.
//
// Interface: a, b (early), c (late) -> carry, sum; a + b + c = 2*carry + sum.
// Timing: purely combinational.
// The gate structure is the paper's; port names are this design's choice.
module afa (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic carry,
  output logic sum
);

  logic h1, h2_n, p;

  always_comb begin
    h1    = a | b;
    h2_n  = ~(a & b);
    p     = h1 & h2_n;
    carry = (c & h1) | ~h2_n;
    sum   = c ? ~p : p;
  end

endmodule
