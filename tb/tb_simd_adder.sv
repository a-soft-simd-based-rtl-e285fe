// tb_simd_adder -- checks the Soft SIMD adder against per-sub-word integer
// arithmetic for all five formats, in addition and subtraction, with random
// operands and with operands chosen to overflow every sub-word.
module tb_simd_adder;
  import simd_pkg::*;
  import tb_ref_pkg::*;

  logic [47:0] a, b, v, sum, exp_sum;
  logic        sub;
  int checks = 0, failures = 0;

  simd_adder #(.W(48)) dut (.a(a), .b(b), .sub(sub), .v(v), .sum(sum));

  // V mask built here from the width, independently of simd_pkg.
  function automatic logic [47:0] mask(int w);
    logic [47:0] m;
    for (int n = 0; n < 48; n++) m[n] = ((n % w) != w - 1);
    return m;
  endfunction

  task automatic check(int w);
    exp_sum = '0;
    for (int i = 0; i < 48 / w; i++)
      exp_sum = put(exp_sum, w, i,
                    sub ? field(a, w, i) - field(b, w, i) : field(a, w, i) + field(b, w, i));
    v = mask(w);
    #1;
    checks++;
    if (sum !== exp_sum) begin
      failures++;
      if (failures < 10)
        $display("FAIL w=%0d sub=%0d a=%h b=%h got %h exp %h", w, sub, a, b, sum, exp_sum);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 5; f++) begin
      int w;
      w = fw(f);
      // every sub-word overflows: all ones + 1, max + max, min - 1
      a = '1; b = '0; for (int i = 0; i < 48 / w; i++) b = put(b, w, i, 1);
      sub = 0; check(w);
      a = '0; b = '0;
      for (int i = 0; i < 48 / w; i++) begin
        a = put(a, w, i, (longint'(1) << (w - 1)) - 1);
        b = put(b, w, i, (longint'(1) << (w - 1)) - 1);
      end
      sub = 0; check(w);
      a = '0; for (int i = 0; i < 48 / w; i++) a = put(a, w, i, -(longint'(1) << (w - 1)));
      b = '0; for (int i = 0; i < 48 / w; i++) b = put(b, w, i, 1);
      sub = 1; check(w);
      a = '0; b = '0; sub = 1; check(w);   // 0 - 0: the +1 carries must cancel
      for (int t = 0; t < 400; t++) begin
        a   = {$urandom, $urandom};
        b   = {$urandom, $urandom};
        sub = $urandom_range(0, 1);
        check(w);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
