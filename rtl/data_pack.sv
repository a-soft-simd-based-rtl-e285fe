// data_pack -- stage-2 repacking crossbar between Soft SIMD formats.
//
// The two stage-2 registers R2 and R3 hold 2*48 bits, read as one list of
// sub-words: R2's sub-words first (lowest bits first), then R3's. The output
// word in format fmt_out holds 48/w_out consecutive entries of that list,
// starting at entry part * (48/w_out). Each value keeps its meaning as a Q1.x
// fraction: it is aligned on its MSB, so a wider target gets zeros appended
// below and a narrower one drops its low bits. No arithmetic is done: every
// output bit is a wire from one input bit or a zero, chosen by a mux, which is
// the crossbar.
//
// Widening (e.g. 8 -> 16) needs two output words for the values of one
// input word: part = 0 gives the first, part = 1 the second. Narrowing
// (e.g. 16 -> 8) fills one output word from R2 and R3 together (part = 0).
// The conversions wired are those of the supported-modes table for sub-words
// of 4, 6, 8, 12 and 16 bits, which are exactly the pairs whose widths
// differ by at most a factor of two; fmt_in = fmt_out passes R2 (part 0) or
// R3 (part 1) unchanged. Any other pair gives zero with supported = 0.
// The MSB alignment, the part select and the R2-then-R3 ordering are this
// design's choices; the table of supported pairs follows the design.
//
// Purely combinational; no clock.
module data_pack
  import simd_pkg::*;
(
  input  word_t r2,
  input  word_t r3,
  input  fmt_e  fmt_in,
  input  fmt_e  fmt_out,
  input  logic  part,
  output word_t dout,
  output logic  supported
);

  // Supported repacking modes (input width -> output width).
  function automatic logic pair_ok(int unsigned wi, int unsigned wo);
    case (wi)
      4:       return wo == 6 || wo == 8;
      6:       return wo == 4 || wo == 8 || wo == 12;
      8:       return wo == 4 || wo == 6 || wo == 12 || wo == 16;
      12:      return wo == 6 || wo == 8 || wo == 16;
      16:      return wo == 8 || wo == 12;
      default: return 1'b0;
    endcase
  endfunction

  function automatic int unsigned code_w(int unsigned c);
    return fmt_width(fmt_e'(c[2:0]));
  endfunction

  // Bit of {R3, R2} that drives output bit b for input format fi, output
  // format fo and part pt; -1 where the output bit is a zero.
  function automatic int src_bit(int unsigned fi, int unsigned fo,
                                 int unsigned pt, int unsigned b);
    int unsigned wi, wo, idx, k;
    wi  = code_w(fi);
    wo  = code_w(fo);
    idx = pt * (WORD_W / wo) + b / wo;   // entry of the sub-word list
    k   = b % wo;                        // bit within the output sub-word
    if (idx < 2 * (WORD_W / wi) && k + wi >= wo)
      return int'(idx * wi + k + wi - wo);
    return -1;
  endfunction

  logic [2*WORD_W-1:0] src;
  assign src = {r3, r2};

  // One hard-wired candidate word per (input format, output format, part);
  // the mux below picks the one asked for.
  word_t cand [5][5][2];
  logic  ok   [5][5];

  for (genvar fi = 0; fi < 5; fi++) begin : g_in
    for (genvar fo = 0; fo < 5; fo++) begin : g_out
      localparam bit OK = (fi == fo) || pair_ok(code_w(fi), code_w(fo));
      assign ok[fi][fo] = OK;
      for (genvar pt = 0; pt < 2; pt++) begin : g_part
        for (genvar b = 0; b < WORD_W; b++) begin : g_bit
          localparam int SB = OK ? src_bit(fi, fo, pt, b) : -1;
          if (SB >= 0) begin : g_wire
            assign cand[fi][fo][pt][b] = src[SB];
          end else begin : g_zero
            assign cand[fi][fo][pt][b] = 1'b0;
          end
        end
      end
    end
  end

  always_comb begin
    dout      = '0;
    supported = 1'b0;
    if (fmt_valid(fmt_in) && fmt_valid(fmt_out)) begin
      supported = ok[fmt_in][fmt_out];
      dout      = cand[fmt_in][fmt_out][part];
    end
  end

endmodule
