// csd_encoder -- recodes a two's complement multiplier into Canonical Signed
// Digit (CSD) form.
//
// Input x is an N-bit two's complement number (a Q1.(N-1) fraction for the
// pipeline); output digit i has weight 2^i (2^(i-N+1) in Q1 terms) and is 0,
// +1 or -1, coded as in simd_pkg::csd_digit_e. The recoding is the
// carry-based form of Reitwiesner's method: with x sign-extended by one bit,
//   c[0]   = 0
//   c[i+1] = majority(x[i], x[i+1], c[i])
//   d[i]   = x[i] + c[i] - 2*c[i+1]
// which yields N digits, no two adjacent ones non-zero, with the same value
// as x. Example: 0111_0011 (0.8984375) becomes 1 0 0 -1 0 1 0 -1.
// The digit set and the non-adjacency property are what CSD means; where the
// recoding happens is not fixed by the design description, and doing it in
// hardware next to the sequencer is this design's choice.
//
// Purely combinational; no clock.
module csd_encoder
  import simd_pkg::*;
#(
  parameter int unsigned N = MULT_W
) (
  input  logic [N-1:0]      x,
  output logic [N-1:0][1:0] d     // csd_digit_e per digit, d[N-1] most significant
);

  logic [N:0] xe;   // x sign-extended by one bit
  logic [N:0] c;

  assign xe   = {x[N-1], x};
  assign c[0] = 1'b0;

  for (genvar i = 0; i < N; i++) begin : g_digit
    assign c[i+1] = (xe[i] & xe[i+1]) | (xe[i] & c[i]) | (xe[i+1] & c[i]);
    // x + c - 2c' is 1, 0 or -1
    assign d[i] = ((xe[i] ^ c[i]) == 1'b0) ? CSD_ZERO :
                  (c[i+1] ? CSD_NEG : CSD_POS);
  end

endmodule
