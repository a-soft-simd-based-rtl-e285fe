// simd_shifter -- Soft SIMD arithmetic right shift by 0 to 3 bits.
//
// Every sub-word is shifted right arithmetically by `shamt`, independently
// of its neighbours. One stage is a row of 1-bit muxes: bit n takes bit n+1
// (V[n] = 1) or keeps its own value (V[n] = 0, a sub-word MSB), which
// repeats the sign bit. Three such stages are cascaded and stage k is
// enabled when shamt > k, so one cycle can skip up to three multiplier
// digits. The mux rows follow the shifter figure; building a shift of 2 or 3
// as a cascade of 1-bit stages is what the text proposes for multi-bit
// shifts. Bits shifted out at the bottom of a sub-word are dropped
// (truncation, as the result keeps the multiplicand's width).
//
// Purely combinational; no clock.
module simd_shifter
  import simd_pkg::*;
#(
  parameter int unsigned W      = WORD_W,
  parameter int unsigned STAGES = 3
) (
  input  logic [W-1:0]               din,
  input  logic [$clog2(STAGES+1)-1:0] shamt,  // 0..STAGES
  input  logic [W-1:0]               v,      // 0 at sub-word MSBs, 1 elsewhere
  output logic [W-1:0]               dout
);

  logic [W-1:0] stage [STAGES+1];

  always_comb begin
    stage[0] = din;
    for (int k = 0; k < STAGES; k++) begin
      for (int n = 0; n < W; n++) begin
        if (shamt > k[$clog2(STAGES+1)-1:0])
          stage[k+1][n] = (v[n] && n < W-1) ? stage[k][(n+1) % W] : stage[k][n];
        else
          stage[k+1][n] = stage[k][n];
      end
    end
    dout = stage[STAGES];
  end

endmodule
