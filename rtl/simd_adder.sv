// simd_adder -- 48-bit Soft SIMD adder/subtractor with configurable carry.
//
// Computes, for every sub-word independently, sum = a + b (sub = 0) or
// sum = a - b (sub = 1), wrapping modulo 2^width inside each sub-word.
// Subtraction is a + ~b + 1. The sub-word layout comes from the V mask
// (V[n] = 0 at a sub-word MSB, see simd_pkg).
//
// Each bit is the slice of the configurable adder: generate is a_n & b_n
// and propagate a_n ^ b_n, both as in a ripple adder, except at a sub-word
// MSB, where propagate is forced to 0 and generate is chosen by a mux: 0 in
// an addition, so no overflow leaks into the next sub-word, and 1 in a
// subtraction, so the next sub-word receives the +1 its complement needs.
// The +1 of the lowest sub-word is the carry into bit 0. The mux is
// selected by `sub`; the complement of b is taken inside this module. Both
// are this design's choices where the slice figure shows neither.
//
// Purely combinational; no clock.
module simd_adder
  import simd_pkg::*;
#(
  parameter int unsigned W = WORD_W
) (
  input  logic [W-1:0] a,     // first operand (shifted accumulator)
  input  logic [W-1:0] b,     // second operand (multiplicand)
  input  logic         sub,   // 1: a - b, 0: a + b
  input  logic [W-1:0] v,     // 0 at sub-word MSBs, 1 elsewhere
  output logic [W-1:0] sum
);

  logic [W-1:0] bb, g, p;
  logic [W:0]   c;

  assign bb   = b ^ {W{sub}};
  assign c[0] = sub;

  for (genvar n = 0; n < W; n++) begin : g_slice
    // generate: OR-with-not-V path in subtraction, AND-with-V path in addition
    assign g[n]   = sub ? ((a[n] & bb[n]) | ~v[n]) : (a[n] & bb[n] & v[n]);
    assign p[n]   = (a[n] ^ bb[n]) & v[n];
    assign c[n+1] = g[n] | (p[n] & c[n]);
    assign sum[n] = a[n] ^ bb[n] ^ c[n];
  end

endmodule
