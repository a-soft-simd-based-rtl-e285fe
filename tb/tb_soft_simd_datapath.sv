// tb_soft_simd_datapath -- drives the datapath's control word directly.
// 1) The worked multiplication example: R1 holds the 8-bit sub-words
//    0.4921875 and -0.5 (0x3F, 0xC0) among random neighbours, four steps
//    (-X), (>>2,+X), (>>2,-X), (>>3,+X) run on R4, the last one written to
//    memory through the stage-2 bypass: 0x38 (0.4375) and 0xC6 (-0.453125).
// 2) Random single steps with every operand source and format, checked on
//    the write-back data and on R4.
// 3) R2/R3 loads followed by repacking into R4 and to memory.
module tb_soft_simd_datapath;
  import simd_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  dp_ctrl_t ctrl;
  logic [47:0] mem_rdata, mem_wdata, acc;
  logic mem_we, pack_supported;
  int checks = 0, failures = 0;

  soft_simd_datapath dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
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

  // One step: shift(S) op M in format w, reference computed here.
  function automatic logic [47:0] ref_step(logic [47:0] s, logic [47:0] m, int w,
                                           int sh, addop_e op);
    logic [47:0] r;
    longint x;
    r = '0;
    for (int i = 0; i < 48 / w; i++) begin
      x = floordiv2k(field(s, w, i), sh);
      if (op == ADD_POS) x += field(m, w, i);
      if (op == ADD_NEG) x -= field(m, w, i);
      r = put(r, w, i, x);
    end
    return r;
  endfunction

  task automatic step(ssrc_e ss, int sh, addop_e op, fmt_e f, bit wb);
    @(negedge clk);
    ctrl = '0;
    ctrl.s_sel = ss; ctrl.shamt = 2'(sh); ctrl.op = op; ctrl.fmt = f;
    ctrl.a_sel = ASRC_R1; ctrl.r4_load = 1; ctrl.wb_en = wb; ctrl.wb_sel = RSRC_ADD;
  endtask

  initial begin
    logic [47:0] x, r1, r2v, r3v, exp;
    ctrl = '0;
    mem_rdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1) worked example
    x = {$urandom, $urandom};
    x[15:0] = 16'h3FC0;
    @(negedge clk);
    ctrl = '0; ctrl.r1_load = 1; mem_rdata = x;
    step(SSRC_ZERO, 0, ADD_NEG, FMT8, 0);
    step(SSRC_R4, 2, ADD_POS, FMT8, 0);
    step(SSRC_R4, 2, ADD_NEG, FMT8, 0);
    step(SSRC_R4, 3, ADD_POS, FMT8, 1);
    ctrl.r2_load = 1;
    #1;
    checks++;
    if (!(mem_we && mem_wdata[15:8] == 8'h38 && mem_wdata[7:0] == 8'hC6)) begin
      failures++;
      $display("FAIL worked example: %h", mem_wdata[15:0]);
    end
    expect_eq("example, all lanes", mem_wdata, ref_mul_word(x, 8, 16'h7300));
    // 2) random single steps
    for (int t = 0; t < 300; t++) begin
      fmt_e f;
      ssrc_e ss;
      addop_e op;
      int sh;
      logic [47:0] r4_before, s;
      f  = fmt_e'($urandom_range(0, 4));
      ss = ssrc_e'($urandom_range(0, 2));
      op = addop_e'($urandom_range(0, 2));
      sh = $urandom_range(0, 3);
      r1 = {$urandom, $urandom};
      @(negedge clk);
      ctrl = '0; ctrl.r1_load = 1; mem_rdata = r1;
      @(negedge clk);
      r4_before = acc;
      mem_rdata = {$urandom, $urandom};
      ctrl = '0;
      ctrl.s_sel = ss; ctrl.shamt = 2'(sh); ctrl.op = op; ctrl.fmt = f;
      ctrl.a_sel = asrc_e'($urandom_range(0, 1));
      ctrl.r4_load = 1; ctrl.wb_en = 1; ctrl.wb_sel = RSRC_ADD;
      s = (ss == SSRC_MEM) ? mem_rdata : (ss == SSRC_R4 ? r4_before : '0);
      exp = ref_step(s, (ctrl.a_sel == ASRC_MEM) ? mem_rdata : r1, fw(int'(f)), sh, op);
      #1;
      expect_eq("step wdata", mem_wdata, exp);
      @(negedge clk);
      ctrl = '0;
      #1;
      expect_eq("step R4", acc, exp);
    end
    // 3) R2/R3 then repack
    for (int t = 0; t < 100; t++) begin
      int fi, fo;
      bit pt;
      r2v = {$urandom, $urandom};
      r3v = {$urandom, $urandom};
      // load R1 = 0, then R2/R3 <= MEM >> 0 + 0 via the adder
      @(negedge clk);
      ctrl = '0; ctrl.s_sel = SSRC_MEM; ctrl.op = ADD_NONE; ctrl.r2_load = 1; mem_rdata = r2v;
      ctrl.fmt = FMT16;
      @(negedge clk);
      ctrl = '0; ctrl.s_sel = SSRC_MEM; ctrl.op = ADD_NONE; ctrl.r3_load = 1; mem_rdata = r3v;
      ctrl.fmt = FMT4;
      fi = $urandom_range(0, 4); fo = $urandom_range(0, 4); pt = 1'($urandom_range(0, 1));
      @(negedge clk);
      ctrl = '0; ctrl.pk_in = fmt_e'(fi); ctrl.pk_out = fmt_e'(fo); ctrl.pk_part = pt;
      ctrl.r4_load = 1; ctrl.r4_sel = RSRC_PACK; ctrl.wb_en = 1; ctrl.wb_sel = RSRC_PACK;
      exp = ref_pack(r2v, r3v, fw(fi), fw(fo), pt);
      #1;
      expect_eq("pack wdata", mem_wdata, exp);
      checks++;
      if (pack_supported !== ref_pack_ok(fw(fi), fw(fo))) failures++;
      @(negedge clk);
      ctrl = '0;
      #1;
      expect_eq("pack R4", acc, exp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
