// tb_mul_sweep -- runs the multiplication workload over the whole grid of
// sub-word widths (4, 6, 8, 12, 16 bits) and multiplier widths (1 to 16
// bits) at the top's default configuration. For each grid point it
// multiplies random 48-bit words by random multipliers of that width,
// checks every lane and the cycle count against the integer reference, and
// prints the average cycles per multiplication and lane results per cycle.
module tb_mul_sweep;
  import simd_pkg::*;
  import tb_ref_pkg::*;

  localparam int PER_POINT = 12;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, done, pack_error, mem_we;
  instr_t instr;
  logic [ADDR_W-1:0] mem_addr;
  logic [47:0] mem_rdata, mem_wdata, acc;

  soft_simd_top dut (.*);

  logic [47:0] mem [1 << ADDR_W];
  assign mem_rdata = mem[mem_addr];
  always @(posedge clk) if (mem_we) mem[mem_addr] <= mem_wdata;

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, last_accept = 0;
  always @(posedge clk) cycle++;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  initial begin
    int g, total;
    instr_t i, nop;
    logic [47:0] x;
    logic [15:0] m;
    in_valid = 0;
    instr = '0;
    nop = '0;
    for (int k = 0; k < (1 << ADDR_W); k++) mem[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 5; f++) begin
      for (int len = 1; len <= 16; len++) begin
        total = 0;
        for (int t = 0; t < PER_POINT; t++) begin
          x = {$urandom, $urandom};
          m = 16'($urandom);
          m = (m >> (16 - len)) << (16 - len);
          mem[3] = x;
          i = '0; i.op = OP_LD_R1; i.addr = 3;
          issue(i, g);
          i = '0; i.op = OP_MUL; i.dst = DST_MEM; i.fmt = fmt_e'(f); i.mult = m; i.addr = 4;
          issue(i, g);
          issue(nop, g);
          total += g;
          checks++;
          if (g != ref_steps(m)) begin
            failures++;
            if (failures < 10) $display("FAIL cycles w=%0d m=%h: %0d", fw(f), m, g);
          end
          @(negedge clk);
          checks++;
          if (mem[4] !== ref_mul_word(x, fw(f), m)) begin
            failures++;
            if (failures < 10) $display("FAIL result w=%0d m=%h", fw(f), m);
          end
        end
        $display("sub-word %2d bits x multiplier %2d bits: %0.2f cycles per multiply, %0.2f lane products per cycle",
                 fw(f), len, real'(total) / PER_POINT,
                 real'(48 / fw(f)) * PER_POINT / real'(total));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
