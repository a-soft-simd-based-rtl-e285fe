// tb_soft_simd_top -- end-to-end test of the Soft SIMD pipeline at its
// default configuration (48-bit word, 16-digit multipliers, 1024-word
// memory port).
//
// A behavioural memory (asynchronous read, write at the clock edge) sits on
// the memory port. Instructions are issued back to back, so a
// multiplication stalls the stream; the gap between its acceptance and the
// next is its cycle count, which must equal the count worked out from the
// multiplier's CSD digits. Scenarios, chosen at random:
//   A  multiply a memory word (all five formats, multipliers of 1 to 16
//      bits) and write the product straight to memory (stage-2 bypass);
//   B  multiply in place with the multiplicand read from memory;
//   C  two products into R2 and R3, then repack them to memory in another
//      format (supported and unsupported conversions);
//   D  one raw shift-add step (memory operand >> k +/- R1);
//   E  multiply into the accumulator R4.
// It starts with the worked example: 0x3F and 0xC0 (Q1.7) times 0.8984375
// give 0x38 and 0xC6 in four cycles. Every mechanism (stall, zero-skip
// shift, shift-only step, subtraction, bypass write, repack, rejected
// repack, format switch) must be seen at least once.
module tb_soft_simd_top;
  import simd_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, done, pack_error, mem_we;
  instr_t instr;
  logic [ADDR_W-1:0] mem_addr;
  logic [47:0] mem_rdata, mem_wdata, acc;

  soft_simd_top dut (.*);

  // behavioural memory bank
  logic [47:0] mem [1 << ADDR_W];
  assign mem_rdata = mem[mem_addr];
  always @(posedge clk) if (mem_we) mem[mem_addr] <= mem_wdata;

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, last_accept = 0;
  int n_stall = 0, n_skip = 0, n_shift_only = 0, n_sub = 0, n_bypass = 0;
  int n_pack = 0, n_pack_err = 0, n_switch = 0, n_mul = 0;
  fmt_e last_fmt = FMT4;

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      if (in_valid && !in_ready) n_stall++;
      if (dut.step_valid && !dut.step_first) begin
        if (dut.step_shamt >= 2 && dut.step_op != ADD_NONE) n_skip++;
        if (dut.step_op == ADD_NONE) n_shift_only++;
      end
      if (dut.step_valid && dut.step_op == ADD_NEG) n_sub++;
      if (mem_we && dut.ctrl.wb_sel == RSRC_ADD) n_bypass++;
      if (done && dut.cur.op == OP_PACK && !pack_error) n_pack++;
      if (pack_error) n_pack_err++;
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, logic [47:0] got, logic [47:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  // Present one instruction and wait until it is taken; returns the number of
  // cycles since the previous instruction was taken.
  task automatic issue(instr_t i, output int gap);
    @(negedge clk);
    in_valid = 1;
    instr    = i;
    #1;
    while (!in_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    gap = cycle - last_accept;
    last_accept = cycle;
    #1;
  endtask

  task automatic drain();
    int g;
    instr_t n;
    n = '0;
    issue(n, g);
    @(negedge clk);
    in_valid = 0;
    repeat (2) @(negedge clk);
  endtask

  function automatic instr_t mk(op_e op, dst_e dst, fmt_e f, logic [15:0] m,
                                logic [ADDR_W-1:0] a);
    instr_t i;
    i = '0;
    i.op = op; i.dst = dst; i.fmt = f; i.mult = m; i.addr = a; i.a_sel = ASRC_R1;
    return i;
  endfunction

  // A multiplier of `len` bits, left-aligned in Q1.15.
  function automatic logic [15:0] rand_mult();
    int len;
    logic [15:0] m;
    len = $urandom_range(1, 16);
    m = 16'($urandom);
    return (m >> (16 - len)) << (16 - len);
  endfunction

  task automatic mul(instr_t i);
    int g;
    instr_t n;
    n = '0;
    if (i.fmt != last_fmt) n_switch++;
    last_fmt = i.fmt;
    n_mul++;
    issue(i, g);
    issue(n, g);      // NOP right behind: the gap is the multiply's length
    checks++;
    if (g != ref_steps(i.mult)) begin
      failures++;
      if (failures < 10) $display("FAIL cycles m=%h: %0d exp %0d", i.mult, g, ref_steps(i.mult));
    end
  endtask

  initial begin
    int g;
    logic [47:0] x, y, z, exp;
    instr_t i;
    in_valid = 0;
    instr = '0;
    for (int k = 0; k < (1 << ADDR_W); k++) mem[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // worked example
    x = {$urandom, $urandom};
    x[15:0] = 16'h3FC0;
    mem[1] = x;
    issue(mk(OP_LD_R1, DST_R4, FMT8, 0, 1), g);
    mul(mk(OP_MUL, DST_MEM, FMT8, 16'h7300, 2));
    drain();
    checks++;
    if (mem[2][15:0] != 16'h38C6) begin
      failures++;
      $display("FAIL worked example: %h", mem[2][15:0]);
    end
    expect_eq("worked example word", mem[2], ref_mul_word(x, 8, 16'h7300));

    for (int t = 0; t < 400; t++) begin
      fmt_e f;
      logic [15:0] m1, m2;
      int sc, w;
      f  = fmt_e'($urandom_range(0, 4));
      w  = fw(int'(f));
      m1 = rand_mult();
      m2 = rand_mult();
      x  = {$urandom, $urandom};
      y  = {$urandom, $urandom};
      sc = $urandom_range(0, 4);
      mem[10] = x;
      mem[11] = y;
      case (sc)
        0: begin   // A
          issue(mk(OP_LD_R1, DST_R4, f, 0, 10), g);
          mul(mk(OP_MUL, DST_MEM, f, m1, 20));
          drain();
          expect_eq("A", mem[20], ref_mul_word(x, w, m1));
        end
        1: begin   // B
          i = mk(OP_MUL, DST_MEM, f, m1, 11);
          i.a_sel = ASRC_MEM;
          mul(i);
          drain();
          expect_eq("B", mem[11], ref_mul_word(y, w, m1));
        end
        2: begin   // C
          int fo;
          bit pt;
          fo = $urandom_range(0, 4);
          pt = 1'($urandom_range(0, 1));
          issue(mk(OP_LD_R1, DST_R4, f, 0, 10), g);
          mul(mk(OP_MUL, DST_R2, f, m1, 0));
          issue(mk(OP_LD_R1, DST_R4, f, 0, 11), g);
          mul(mk(OP_MUL, DST_R3, f, m2, 0));
          i = mk(OP_PACK, DST_MEM, f, 0, 21);
          i.fmt_out = fmt_e'(fo);
          i.part = pt;
          issue(i, g);
          drain();
          expect_eq("C", mem[21],
                    ref_pack(ref_mul_word(x, w, m1), ref_mul_word(y, w, m2), w, fw(fo), pt));
        end
        3: begin   // D
          int sh;
          addop_e op;
          sh = $urandom_range(0, 3);
          op = addop_e'($urandom_range(0, 2));
          issue(mk(OP_LD_R1, DST_R4, f, 0, 11), g);
          i = mk(OP_SHADD, DST_MEM, f, 0, 10);
          i.s_sel = SSRC_MEM; i.shamt = 2'(sh); i.addop = op;
          issue(i, g);
          drain();
          exp = '0;
          for (int k = 0; k < 48 / w; k++)
            exp = put(exp, w, k, floordiv2k(field(x, w, k), sh) +
                      (op == ADD_POS ? field(y, w, k) : (op == ADD_NEG ? -field(y, w, k) : 0)));
          expect_eq("D", mem[10], exp);
        end
        default: begin   // E
          issue(mk(OP_LD_R1, DST_R4, f, 0, 10), g);
          mul(mk(OP_MUL, DST_R4, f, m1, 0));
          drain();
          expect_eq("E", acc, ref_mul_word(x, w, m1));
        end
      endcase
    end

    $display("mechanisms: mul=%0d stall=%0d zero_skip=%0d shift_only=%0d sub=%0d bypass=%0d pack=%0d pack_rejected=%0d format_switch=%0d",
             n_mul, n_stall, n_skip, n_shift_only, n_sub, n_bypass, n_pack, n_pack_err, n_switch);
    if (n_stall == 0)      begin failures++; $display("FAIL no stall"); end
    if (n_skip == 0)       begin failures++; $display("FAIL no zero skip"); end
    if (n_shift_only == 0) begin failures++; $display("FAIL no shift-only step"); end
    if (n_sub == 0)        begin failures++; $display("FAIL no subtraction"); end
    if (n_bypass == 0)     begin failures++; $display("FAIL no bypass write"); end
    if (n_pack == 0)       begin failures++; $display("FAIL no repack"); end
    if (n_pack_err == 0)   begin failures++; $display("FAIL no rejected repack"); end
    if (n_switch == 0)     begin failures++; $display("FAIL no format switch"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
