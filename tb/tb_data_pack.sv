// tb_data_pack -- checks the repacking crossbar for every pair of the five
// formats and both part selects against a value-list model (R2's sub-words,
// then R3's; values MSB-aligned), including the supported flag and the zero
// output of conversions that are not wired.
module tb_data_pack;
  import simd_pkg::*;
  import tb_ref_pkg::*;

  logic [47:0] r2, r3, dout, exp_out;
  fmt_e fmt_in, fmt_out;
  logic part, supported;
  int checks = 0, failures = 0;

  data_pack dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      r2 = {$urandom, $urandom};
      r3 = {$urandom, $urandom};
      for (int fi = 0; fi < 5; fi++)
        for (int fo = 0; fo < 5; fo++)
          for (int pt = 0; pt < 2; pt++) begin
            fmt_in  = fmt_e'(fi);
            fmt_out = fmt_e'(fo);
            part    = pt[0];
            #1;
            exp_out = ref_pack(r2, r3, fw(fi), fw(fo), pt[0]);
            checks++;
            if (dout !== exp_out || supported !== ref_pack_ok(fw(fi), fw(fo))) begin
              failures++;
              if (failures < 10)
                $display("FAIL %0d->%0d part %0d: got %h (%b) exp %h", fw(fi), fw(fo), pt,
                         dout, supported, exp_out);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
