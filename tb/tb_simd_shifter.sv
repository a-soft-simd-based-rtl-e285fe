// tb_simd_shifter -- checks the Soft SIMD arithmetic right shift (0..3) of
// every sub-word against floor division, for all five formats.
module tb_simd_shifter;
  import simd_pkg::*;
  import tb_ref_pkg::*;

  logic [47:0] din, v, dout, exp_out;
  logic [1:0]  shamt;
  int checks = 0, failures = 0;

  simd_shifter #(.W(48), .STAGES(3)) dut (.din(din), .shamt(shamt), .v(v), .dout(dout));

  function automatic logic [47:0] mask(int w);
    logic [47:0] m;
    for (int n = 0; n < 48; n++) m[n] = ((n % w) != w - 1);
    return m;
  endfunction

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
      v = mask(w);
      for (int t = 0; t < 400; t++) begin
        din   = (t == 0) ? 48'h8000_8000_8000 : {$urandom, $urandom};
        shamt = 2'(t % 4);
        exp_out = '0;
        for (int i = 0; i < 48 / w; i++)
          exp_out = put(exp_out, w, i, floordiv2k(field(din, w, i), int'(shamt)));
        #1;
        checks++;
        if (dout !== exp_out) begin
          failures++;
          if (failures < 10)
            $display("FAIL w=%0d sh=%0d din=%h got %h exp %h", w, shamt, din, dout, exp_out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
