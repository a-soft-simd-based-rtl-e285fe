// soft_simd_datapath -- the two-stage Soft SIMD pipeline: registers, operand
// muxes, the shift-add stage and the repacking stage.
//
// Stage 1 computes adder_out = shift(S) op M per sub-word, where
//   S  (shifter input) is zero, the memory read data or the accumulator R4,
//   M  (multiplicand)  is R1 or the memory read data,
//   op                 adds M, subtracts M or adds nothing,
// and shift is the arithmetic right shift by 0..3 inside each sub-word.
// Repeating that step with S = R4 and M = R1 performs a multiplication, one
// multiplier digit pattern per cycle. adder_out can be stored in R4 (the
// accumulator), in R2 or R3 (the inputs of stage 2), or written straight to
// memory, bypassing stage 2.
// Stage 2 is the data pack crossbar: it repacks R2/R3 into another sub-word
// format, into R4 or to memory.
//
// Register and mux placement follows the block scheme: R1 loads from memory
// and otherwise holds; R2 and R3 load from the adder or hold; R4 loads from
// the adder or from the data pack, or holds; the write-back mux picks the
// adder or the data pack. The zero input of the shifter mux is this design's
// addition (the first step of a multiplication starts from an empty
// accumulator). All registers are reset to zero (asynchronous, active low),
// also a choice of this design. Memory read data is used in the cycle it is
// presented (asynchronous read); mem_we/mem_wdata are combinational outputs
// that the memory takes at the clock edge.
module soft_simd_datapath
  import simd_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  dp_ctrl_t ctrl,
  input  word_t    mem_rdata,
  output word_t    mem_wdata,
  output logic     mem_we,
  output word_t    acc,            // R4, for observation
  output logic     pack_supported  // the stage-2 conversion asked for is wired
);

  word_t r1_q, r2_q, r3_q, r4_q;
  word_t v, s_in, s_out, m_in, add_out, pack_out, r4_in;

  assign v = v_mask(ctrl.fmt);

  // Stage 1: operand muxes, shifter, adder.
  always_comb begin
    case (ctrl.s_sel)
      SSRC_MEM: s_in = mem_rdata;
      SSRC_R4:  s_in = r4_q;
      default:  s_in = '0;
    endcase
    m_in = (ctrl.a_sel == ASRC_MEM) ? mem_rdata : r1_q;
    if (ctrl.op == ADD_NONE) m_in = '0;
  end

  simd_shifter #(.W(WORD_W), .STAGES(3)) u_shift (
    .din   (s_in),
    .shamt (ctrl.shamt),
    .v     (v),
    .dout  (s_out)
  );

  simd_adder #(.W(WORD_W)) u_add (
    .a   (s_out),
    .b   (m_in),
    .sub (ctrl.op == ADD_NEG),
    .v   (v),
    .sum (add_out)
  );

  // Stage 2: data pack.
  data_pack u_pack (
    .r2        (r2_q),
    .r3        (r3_q),
    .fmt_in    (ctrl.pk_in),
    .fmt_out   (ctrl.pk_out),
    .part      (ctrl.pk_part),
    .dout      (pack_out),
    .supported (pack_supported)
  );

  assign r4_in = (ctrl.r4_sel == RSRC_PACK) ? pack_out : add_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1_q <= '0;
      r2_q <= '0;
      r3_q <= '0;
      r4_q <= '0;
    end else begin
      if (ctrl.r1_load) r1_q <= mem_rdata;
      if (ctrl.r2_load) r2_q <= add_out;
      if (ctrl.r3_load) r3_q <= add_out;
      if (ctrl.r4_load) r4_q <= r4_in;
    end
  end

  assign mem_we    = ctrl.wb_en;
  assign mem_wdata = (ctrl.wb_sel == RSRC_PACK) ? pack_out : add_out;
  assign acc       = r4_q;

endmodule
