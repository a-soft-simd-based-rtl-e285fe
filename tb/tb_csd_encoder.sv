// tb_csd_encoder -- exhaustive check of the 16-digit CSD recoder: the
// digits must equal the non-adjacent form of the input (same value, no two
// neighbouring non-zero digits), plus the 8-bit multiplier of the worked
// example (0111_0011 -> 1 0 0 -1 0 1 0 -1).
module tb_csd_encoder;
  import simd_pkg::*;
  import tb_ref_pkg::*;

  logic [15:0]      x;
  logic [15:0][1:0] d;
  logic [7:0]       x8;
  logic [7:0][1:0]  d8;
  int checks = 0, failures = 0;

  csd_encoder #(.N(16)) dut (.x(x), .d(d));
  csd_encoder #(.N(8))  dut8 (.x(x8), .d(d8));

  function automatic int dv(logic [1:0] c);
    if (c == 2'b01) return 1;
    if (c == 2'b11) return -1;
    if (c == 2'b00) return 0;
    return 99;   // illegal code
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    digits_t ref_d;
    for (int i = 0; i < 65536; i++) begin
      bit bad;
      x = 16'(i);
      #1;
      ref_d = naf16(x);
      bad = 0;
      for (int k = 0; k < 16; k++) if (dv(d[k]) != ref_d[k]) bad = 1;
      checks++;
      if (bad) begin
        failures++;
        if (failures < 10) $display("FAIL x=%h", x);
      end
    end
    // worked example: expected digits LSB first: -1 0 1 0 -1 0 0 1
    x8 = 8'b0111_0011;
    #1;
    checks++;
    if (!(dv(d8[0]) == -1 && dv(d8[1]) == 0 && dv(d8[2]) == 1 && dv(d8[3]) == 0 &&
          dv(d8[4]) == -1 && dv(d8[5]) == 0 && dv(d8[6]) == 0 && dv(d8[7]) == 1)) begin
      failures++;
      $display("FAIL worked example: %b", d8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
