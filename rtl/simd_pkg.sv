// simd_pkg -- types, constants and helper functions shared by the Soft SIMD
// pipeline.
//
// The pipeline works on one 48-bit word that software cuts into equal
// sub-words of 4, 6, 8, 12 or 16 bits (12, 8, 6, 4 or 3 lanes). The word
// width and the five formats are the configuration the design is built for.
// Everything that depends on the format is derived from one mask, V: V[n] is
// 0 where bit n is the most significant bit of a sub-word and 1 elsewhere.
// The adder uses V to cut its carry chain and the shifter uses it to
// sign-extend. The 3-bit format code and the 2-bit CSD digit code are this
// design's own encodings.
package simd_pkg;

  localparam int unsigned WORD_W = 48;   // datapath width
  localparam int unsigned MULT_W = 16;   // multiplier digits (Q1.15 at most)
  localparam int unsigned SHAMT_W = 2;   // shift of 0..3 per cycle

  typedef logic [WORD_W-1:0] word_t;

  // Soft SIMD sub-word formats.
  typedef enum logic [2:0] {
    FMT4  = 3'd0,
    FMT6  = 3'd1,
    FMT8  = 3'd2,
    FMT12 = 3'd3,
    FMT16 = 3'd4
  } fmt_e;

  // One CSD digit: bit 0 says "non-zero", bit 1 says "negative".
  typedef enum logic [1:0] {
    CSD_ZERO = 2'b00,
    CSD_POS  = 2'b01,
    CSD_NEG  = 2'b11
  } csd_digit_e;

  // Operation applied to the stage-1 adder's second operand.
  typedef enum logic [1:0] {
    ADD_NONE = 2'd0,   // shifted operand + 0 (shift only)
    ADD_POS  = 2'd1,   // shifted operand + multiplicand
    ADD_NEG  = 2'd2    // shifted operand - multiplicand
  } addop_e;


  // Input of the shifter in stage 1.
  typedef enum logic [1:0] {
    SSRC_ZERO = 2'd0,   // zero: first step of a multiplication
    SSRC_MEM  = 2'd1,   // memory read data
    SSRC_R4   = 2'd2    // accumulator R4
  } ssrc_e;

  // Multiplicand input of the stage-1 adder.
  typedef enum logic {
    ASRC_R1  = 1'b0,
    ASRC_MEM = 1'b1
  } asrc_e;

  // Source of R4 and of the memory write data.
  typedef enum logic {
    RSRC_ADD  = 1'b0,   // stage-1 adder output (stage 2 bypassed)
    RSRC_PACK = 1'b1    // stage-2 data pack output
  } rsrc_e;

  // Per-cycle control of the datapath.
  typedef struct packed {
    logic                r1_load;   // R1 <= memory read data
    asrc_e               a_sel;     // multiplicand source
    ssrc_e               s_sel;     // shifter source
    logic [SHAMT_W-1:0]  shamt;     // right shift 0..3
    addop_e              op;        // +0, +multiplicand, -multiplicand
    fmt_e                fmt;       // stage-1 sub-word format
    logic                r2_load;   // R2 <= adder output
    logic                r3_load;   // R3 <= adder output
    logic                r4_load;
    rsrc_e               r4_sel;
    fmt_e                pk_in;     // stage-2 formats and part select
    fmt_e                pk_out;
    logic                pk_part;
    logic                wb_en;     // write back to memory
    rsrc_e               wb_sel;
  } dp_ctrl_t;

  // ---------------------------------------------------------------------
  // Instruction word of soft_simd_top (this design's own format).
  // ---------------------------------------------------------------------
  localparam int unsigned ADDR_W = 10;   // memory word address

  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,
    OP_LD_R1 = 3'd1,   // R1 <= MEM[addr]
    OP_MUL   = 3'd2,   // dst <= multiplicand * mult, one cycle per CSD step
    OP_SHADD = 3'd3,   // dst <= (src >> shamt) op multiplicand, one cycle
    OP_PACK  = 3'd4    // dst <= repack(R2, R3, fmt -> fmt_out, part)
  } op_e;

  typedef enum logic [1:0] {
    DST_R4  = 2'd0,
    DST_R2  = 2'd1,
    DST_R3  = 2'd2,
    DST_MEM = 2'd3     // MEM[addr]
  } dst_e;

  typedef struct packed {
    op_e                op;
    dst_e               dst;
    fmt_e               fmt;      // stage-1 format; input format of OP_PACK
    fmt_e               fmt_out;  // output format of OP_PACK
    logic               part;     // part select of OP_PACK
    ssrc_e              s_sel;    // shifter source of OP_SHADD
    asrc_e              a_sel;    // multiplicand source of OP_MUL / OP_SHADD
    logic [SHAMT_W-1:0] shamt;    // shift of OP_SHADD
    addop_e             addop;    // operation of OP_SHADD
    logic [MULT_W-1:0]  mult;     // OP_MUL multiplier, two's complement Q1.15
    logic [ADDR_W-1:0]  addr;
  } instr_t;

  // Sub-word width in bits of a format; 0 for an unused code.
  function automatic int unsigned fmt_width(fmt_e f);
    case (f)
      FMT4:    return 4;
      FMT6:    return 6;
      FMT8:    return 8;
      FMT12:   return 12;
      FMT16:   return 16;
      default: return 0;
    endcase
  endfunction

  // True for the five codes above.
  function automatic logic fmt_valid(logic [2:0] f);
    return f <= 3'd4;
  endfunction

  // V mask of a format: 0 at each sub-word MSB, 1 elsewhere. An unused code
  // is treated as 16-bit.
  function automatic word_t v_mask(fmt_e f);
    word_t v;
    int unsigned w;
    w = fmt_width(f);
    if (w == 0) w = 16;
    for (int unsigned n = 0; n < WORD_W; n++)
      v[n] = ((n % w) != (w - 1));
    return v;
  endfunction

endpackage
