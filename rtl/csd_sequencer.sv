// csd_sequencer -- turns a CSD multiplier into the sequence of shift-and-add
// steps of a Soft SIMD multiplication, skipping zero digits.
//
// The product is built Horner-style from the least significant non-zero
// digit upwards: acc = d_k * X first, then, for each more significant
// non-zero digit d_j, acc = (acc >> (k - j)) + d_j * X, and finally the
// accumulator is shifted right by the weight left above the top non-zero
// digit. One step is one cycle. A step can shift by at most 3 (the
// pipeline's shifter supports patterns "1", "10" and "100"), so a gap of more
// than two zeros costs an extra shift-only step (add 0). The first step needs
// no shift: the accumulator starts at zero, so all trailing zero digits are
// skipped at once there. Example (digits 1 0 0 -1 0 1 0 -1, MSB first):
// steps are (-X), (>>2, +X), (>>2, -X), (>>3, +X): four cycles, three
// additions.
//
// Interface: `start` is sampled when the sequencer is idle (busy = 0) and
// the first step is issued in that same cycle from `digits`; following steps
// come one per cycle from registered state while busy = 1. Every step has
// step_valid = 1; step_first marks the first (whose shifter input must be
// zero) and step_last the last, after which busy falls. A zero multiplier
// gives one step, first and last, that adds 0. The step format and the
// handshake are this design's own; the stepping follows the multiplication
// example of the design description.
module csd_sequencer
  import simd_pkg::*;
#(
  parameter int unsigned N = MULT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [N-1:0][1:0] digits,       // CSD digits, [N-1] most significant
  output logic              busy,
  output logic              step_valid,
  output logic              step_first,
  output logic              step_last,
  output logic [SHAMT_W-1:0] step_shamt,
  output addop_e            step_op
);

  localparam int unsigned CW = $clog2(N + 1);

  logic              active_q;
  logic [N-1:0][1:0] rem_q, rem_d;
  logic [CW-1:0]     left_q, left_d;    // digit positions still to shift past

  function automatic addop_e dig2op(logic [1:0] dg);
    if (!dg[0])     return ADD_NONE;
    else if (dg[1]) return ADD_NEG;
    else            return ADD_POS;
  endfunction

  always_comb begin
    int unsigned lo;
    logic        found;
    int unsigned sh;
    step_valid = 1'b0;
    step_first = 1'b0;
    step_last  = 1'b0;
    step_shamt = '0;
    step_op    = ADD_NONE;
    rem_d      = rem_q;
    left_d     = left_q;
    lo         = 0;
    found      = 1'b0;
    sh         = 0;
    if (!active_q) begin
      if (start) begin
        step_valid = 1'b1;
        step_first = 1'b1;
        for (int i = N - 1; i >= 0; i--)
          if (digits[i][0]) begin
            lo    = i;
            found = 1'b1;
          end
        if (found) begin
          step_op = dig2op(digits[lo]);
          rem_d   = '0;
          for (int i = 0; i < N; i++)
            if (i + lo + 1 < N) rem_d[i] = digits[i + lo + 1];
          left_d  = CW'(N - 1 - lo);
        end else begin
          step_op = ADD_NONE;
          rem_d   = '0;
          left_d  = '0;
        end
        step_last = (left_d == '0);
      end
    end else begin
      step_valid = 1'b1;
      if (rem_q[0][0])      sh = 1;
      else if (rem_q[1][0]) sh = 2;
      else if (rem_q[2][0]) sh = 3;
      else                  sh = (left_q < 3) ? int'(left_q) : 3;
      step_shamt = SHAMT_W'(sh);
      step_op    = dig2op(rem_q[sh-1]);
      rem_d      = rem_q >> (2 * sh);
      left_d     = left_q - CW'(sh);
      step_last  = (left_d == '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      rem_q    <= '0;
      left_q   <= '0;
    end else if (step_valid) begin
      active_q <= !step_last;
      rem_q    <= rem_d;
      left_q   <= left_d;
    end
  end

  assign busy = active_q;

  // Every step after the first shifts by 1..3.
  a_shift_range: assert property (@(posedge clk) disable iff (!rst_n)
    (step_valid && !step_first) |-> (step_shamt != '0));

endmodule
