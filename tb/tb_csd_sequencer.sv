// tb_csd_sequencer -- feeds CSD digit vectors (worked example, zero, single
// digits, random non-adjacent forms) to the sequencer and rebuilds the digit
// vector from the steps it issues: each step's shift moves one position
// further up, and its add/subtract is the digit there. The rebuilt digits
// must equal the input, shifts must stay within 1..3 after the first step,
// and the number of cycles must match the count worked out from the digits.
module tb_csd_sequencer;
  import simd_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0][1:0] digits;
  logic busy, step_valid, step_first, step_last;
  logic [1:0] step_shamt;
  addop_e step_op;
  int checks = 0, failures = 0, cycles = 0;

  csd_sequencer #(.N(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [1:0] enc(int dg);
    return dg == 0 ? 2'b00 : (dg > 0 ? 2'b01 : 2'b11);
  endfunction

  task automatic run(logic [15:0] m);
    digits_t ref_d;
    int ops[$], shs[$], firsts[$];
    int n, pos, got[16], total;
    bit bad;
    ref_d = naf16(m);
    for (int i = 0; i < 16; i++) digits[i] = enc(ref_d[i]);
    @(negedge clk);
    start = 1;
    n = 0;
    do begin
      #1;
      if (step_valid) begin
        ops.push_back(step_op == ADD_POS ? 1 : (step_op == ADD_NEG ? -1 : 0));
        shs.push_back(int'(step_shamt));
        firsts.push_back(int'(step_first));
        n++;
      end
      @(negedge clk);
      start = 0;
      digits = '0;
    end while (!(ops.size() > 0 && !busy) && n < 40);
    // rebuild: first step sits at 15 - (sum of later shifts)
    total = 0;
    for (int i = 1; i < shs.size(); i++) total += shs[i];
    for (int i = 0; i < 16; i++) got[i] = 0;
    pos = 15 - total;
    bad = (firsts[0] != 1);
    if (pos >= 0) got[pos] = ops[0];
    for (int i = 1; i < shs.size(); i++) begin
      if (shs[i] < 1 || shs[i] > 3 || firsts[i] != 0) bad = 1;
      pos += shs[i];
      if (pos > 15) bad = 1;
      else if (ops[i] != 0) got[pos] = ops[i];
    end
    for (int i = 0; i < 16; i++) if (got[i] != ref_d[i]) bad = 1;
    checks++;
    if (bad) begin
      failures++;
      if (failures < 10) $display("FAIL digits of m=%h", m);
    end
    checks++;
    if (n != ref_steps(m)) begin
      failures++;
      if (failures < 10) $display("FAIL cycles of m=%h: %0d, expected %0d", m, n, ref_steps(m));
    end
  endtask

  initial begin
    digits = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(16'h7300);                 // worked example: 4 steps
    checks++;
    if (ref_steps(16'h7300) != 4) failures++;
    run(16'h0000);
    run(16'h8000);
    run(16'h0001);
    run(16'h4000);
    run(16'h0101);                 // long zero runs: shift-only steps
    for (int t = 0; t < 1500; t++) run(16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
