// ks_adder: W-bit Kogge-Stone parallel-prefix adder (no carry-in).
//
// Bit i generates g = a&b and propagates p = a^b.  ceil(log2 W) prefix
// levels follow; at level l every position i >= 2^l combines its (G,P) with
// that of position i - 2^l:
//   G = G_hi | (P_hi & G_lo),  P = P_hi & P_lo
// After the last level G[i] is the carry out of bit i, so
// s[i] = p[i] ^ G[i-1] and cout = G[W-1].  Every level has full fan-in-two
// cells in every position, giving the minimum logic depth of a prefix adder.
//
// Interface: a, b -> s = (a + b) mod 2^W, cout.
// Timing: purely combinational, ceil(log2 W) + 2 cell levels.
// Used as the vector merge adder after the compressor array.  The paper
// names the algorithm only; this is the textbook radix-2 form.
module ks_adder #(
  parameter int unsigned W = 11
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] s,
  output logic         cout
);

  localparam int unsigned LEVELS = (W > 1) ? $clog2(W) : 1;

  // g[l], p[l]: group generate/propagate after l levels.  The group
  // propagate of the last level is not needed.
  logic [LEVELS:0][W-1:0]   g;
  logic [LEVELS-1:0][W-1:0] p;

  assign g[0] = a & b;
  assign p[0] = a ^ b;

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    for (genvar i = 0; i < W; i++) begin : g_bit
      if (i >= (1 << l)) begin : g_cell
        assign g[l+1][i] = g[l][i] | (p[l][i] & g[l][i - (1 << l)]);
      end else begin : g_pass
        assign g[l+1][i] = g[l][i];
      end
      if (l + 1 < LEVELS) begin : g_prop
        if (i >= (1 << l)) begin : g_cell
          assign p[l+1][i] = p[l][i] & p[l][i - (1 << l)];
        end else begin : g_pass
          assign p[l+1][i] = p[l][i];
        end
      end
    end
  end

  assign s    = p[0] ^ {g[LEVELS][W-2:0], 1'b0};
  assign cout = g[LEVELS][W-1];

endmodule
