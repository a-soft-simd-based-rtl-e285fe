// soft_simd_top -- Soft SIMD computing pipeline with its control.
//
// The pipeline multiplies every sub-word of a 48-bit word by one scalar
// multiplier, a sub-word format (4, 6, 8, 12 or 16 bits) being chosen per
// instruction, and repacks words between formats. Values are Q1.x
// fractions; a product keeps the multiplicand's width (truncated).
//
// Instructions (simd_pkg::instr_t, this design's own format) arrive on a
// valid/ready handshake and run one at a time:
//   OP_LD_R1  R1 <= MEM[addr]                                      1 cycle
//   OP_MUL    dst <= multiplicand * mult                     1 cycle per step
//             The multiplier is recoded to CSD (csd_encoder) and walked by
//             csd_sequencer: one shift-and-add step per non-zero digit, zero
//             runs of up to two digits folded into the shift, longer runs
//             costing shift-only steps. in_ready is low while steps remain
//             (the instruction stream is stalled).
//   OP_SHADD  dst <= (src >> shamt) +/- multiplicand (or + 0)      1 cycle
//             one raw stage-1 step; src is zero, MEM[addr] or R4.
//   OP_PACK   dst <= data_pack(R2, R3, fmt -> fmt_out, part)       1 cycle
// dst is R4, R2, R3 or MEM[addr]. Stage-1 results reach R4 or memory
// directly, bypassing stage 2; OP_PACK can only target R4 or memory (the
// paths the block scheme has) and a R2/R3 destination writes nothing there.
// An OP_PACK for a conversion the crossbar does not wire raises pack_error
// for that cycle and writes zero. During a multiplication R4 holds the
// running partial product.
//
// Timing: an instruction is taken when in_valid && in_ready; `done` pulses in
// the cycle its result is written (the register or memory takes it at the
// following edge). mem_addr, mem_we and mem_wdata are combinational; the
// memory must return mem_rdata for mem_addr in the same cycle. Reset is
// asynchronous and active low.
//
// The datapath, the sub-word formats, CSD recoding with up to 3-digit
// patterns per cycle and the repacking modes follow the design; the
// instruction set, the handshake, the memory port and the one-at-a-time
// issue are this design's choices, as no control interface is described.
module soft_simd_top
  import simd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // instruction stream
  input  logic              in_valid,
  output logic              in_ready,
  input  instr_t            instr,
  output logic              done,
  output logic              pack_error,
  // memory bank port
  output logic [ADDR_W-1:0] mem_addr,
  input  word_t             mem_rdata,
  output logic              mem_we,
  output word_t             mem_wdata,
  // accumulator R4
  output word_t             acc
);

  logic              seq_busy, step_valid, step_first, step_last;
  logic [SHAMT_W-1:0] step_shamt;
  addop_e            step_op;
  logic [MULT_W-1:0][1:0] digits;
  logic              accept, mul_start;
  instr_t            cur_q, cur;
  dp_ctrl_t          ctrl;
  logic              pack_ok;
  logic              active;

  assign in_ready  = !seq_busy;
  assign accept    = in_valid && in_ready;
  assign mul_start = accept && instr.op == OP_MUL;

  // The instruction being executed: the new one in its first cycle, the
  // latched one during the remaining steps of a multiplication.
  assign cur = seq_busy ? cur_q : instr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cur_q <= '0;
    else if (accept) cur_q <= instr;
  end

  csd_encoder #(.N(MULT_W)) u_csd (
    .x (instr.mult),
    .d (digits)
  );

  csd_sequencer #(.N(MULT_W)) u_seq (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (mul_start),
    .digits     (digits),
    .busy       (seq_busy),
    .step_valid (step_valid),
    .step_first (step_first),
    .step_last  (step_last),
    .step_shamt (step_shamt),
    .step_op    (step_op)
  );

  // Decode into datapath control.
  always_comb begin
    logic  finish;
    ctrl          = '0;
    ctrl.fmt      = cur.fmt;
    ctrl.pk_in    = cur.fmt;
    ctrl.pk_out   = cur.fmt_out;
    ctrl.pk_part  = cur.part;
    ctrl.a_sel    = cur.a_sel;
    ctrl.s_sel    = SSRC_ZERO;
    ctrl.r4_sel   = RSRC_ADD;
    ctrl.wb_sel   = RSRC_ADD;
    finish        = 1'b0;
    if (active) begin
      case (cur.op)
        OP_LD_R1: begin
          ctrl.r1_load = 1'b1;
          finish       = 1'b1;
        end
        OP_MUL: begin
          ctrl.s_sel   = step_first ? SSRC_ZERO : SSRC_R4;
          ctrl.shamt   = step_shamt;
          ctrl.op      = step_op;
          ctrl.r4_load = 1'b1;            // running partial product
          finish       = step_last;
        end
        OP_SHADD: begin
          ctrl.s_sel   = cur.s_sel;
          ctrl.shamt   = cur.shamt;
          ctrl.op      = cur.addop;
          finish       = 1'b1;
        end
        OP_PACK: begin
          ctrl.r4_sel  = RSRC_PACK;
          ctrl.wb_sel  = RSRC_PACK;
          finish       = 1'b1;
        end
        default: finish = 1'b1;            // OP_NOP and unused codes
      endcase
      if (finish && (cur.op == OP_MUL || cur.op == OP_SHADD || cur.op == OP_PACK)) begin
        case (cur.dst)
          DST_R4:  ctrl.r4_load = 1'b1;
          DST_R2:  ctrl.r2_load = (cur.op != OP_PACK);
          DST_R3:  ctrl.r3_load = (cur.op != OP_PACK);
          DST_MEM: ctrl.wb_en   = 1'b1;
          default: ;
        endcase
      end
    end
    done = active && finish;
  end

  assign active     = seq_busy || accept;
  assign pack_error = active && cur.op == OP_PACK && !pack_ok;
  assign mem_addr   = cur.addr;

  soft_simd_datapath u_dp (
    .clk            (clk),
    .rst_n          (rst_n),
    .ctrl           (ctrl),
    .mem_rdata      (mem_rdata),
    .mem_wdata      (mem_wdata),
    .mem_we         (mem_we),
    .acc            (acc),
    .pack_supported (pack_ok)
  );

  // A multiplication step is only issued while a multiplication runs.
  a_step_in_mul: assert property (@(posedge clk) disable iff (!rst_n)
    step_valid |-> (cur.op == OP_MUL));

endmodule
