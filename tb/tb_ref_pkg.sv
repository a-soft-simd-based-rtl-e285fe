// tb_ref_pkg -- reference arithmetic for the Soft SIMD testbenches.
//
// Everything here works on plain integers, one sub-word at a time, and does
// not reuse any RTL function: sub-word fields are cut out with shifts, added
// modulo 2^w, shifted with floor division, and the CSD digits of a
// multiplier are found with the textbook non-adjacent-form loop.
package tb_ref_pkg;

  localparam int WW = 48;

  function automatic int fw(int code);   // format code -> width
    case (code)
      0: return 4;  1: return 6;  2: return 8;  3: return 12;  4: return 16;
      default: return 0;
    endcase
  endfunction

  // Signed value of sub-word i of width w.
  function automatic longint field(logic [WW-1:0] x, int w, int i);
    longint u;
    u = longint'((x >> (i * w)) & ((48'd1 << w) - 1));
    if (u >= (longint'(1) << (w - 1))) u -= (longint'(1) << w);
    return u;
  endfunction

  // Place value v (taken modulo 2^w) into sub-word i.
  function automatic logic [WW-1:0] put(logic [WW-1:0] x, int w, int i, longint v);
    logic [WW-1:0] m, f;
    m = ((48'd1 << w) - 1) << (i * w);
    f = (WW'(v) & ((48'd1 << w) - 1)) << (i * w);
    return (x & ~m) | f;
  endfunction

  function automatic longint wrapw(longint v, int w);
    longint m;
    m = longint'(1) << w;
    v = v % m;
    if (v < 0) v += m;
    if (v >= m / 2) v -= m;
    return v;
  endfunction

  function automatic longint floordiv2k(longint v, int k);
    longint d;
    d = longint'(1) << k;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  // Non-adjacent form of a 16-bit signed multiplier: dg[i] in {-1,0,1}.
  typedef int digits_t [16];
  function automatic digits_t naf16(logic [15:0] m);
    digits_t dg;
    longint x;
    x = longint'($signed(m));
    for (int i = 0; i < 16; i++) begin
      if (x % 2 != 0) begin
        dg[i] = 2 - int'(((x % 4) + 4) % 4);
        x     = x - dg[i];
      end else dg[i] = 0;
      x = x / 2;
    end
    return dg;
  endfunction

  // Soft SIMD product of one sub-word value a (width w) and Q1.15 multiplier
  // m, built LSB digit first with a floor shift per digit position and a
  // wrap to w bits after each addition.
  function automatic longint ref_mul(longint a, int w, logic [15:0] m);
    digits_t dg;
    longint acc;
    bit started;
    dg = naf16(m);
    acc = 0;
    started = 0;
    for (int i = 0; i < 16; i++) begin
      if (started) acc = floordiv2k(acc, 1);
      if (dg[i] != 0) begin
        acc = wrapw(acc + dg[i] * a, w);
        started = 1;
      end
    end
    return acc;
  endfunction

  function automatic logic [WW-1:0] ref_mul_word(logic [WW-1:0] x, int w, logic [15:0] m);
    logic [WW-1:0] r;
    r = '0;
    for (int i = 0; i < WW / w; i++) r = put(r, w, i, ref_mul(field(x, w, i), w, m));
    return r;
  endfunction

  // Number of cycles a multiplication takes: first non-zero digit, then one
  // step per gap of up to 3 positions, then the shift above the top digit.
  function automatic int ref_steps(logic [15:0] m);
    digits_t dg;
    int n, prev;
    dg = naf16(m);
    n = 0;
    prev = -1;
    for (int i = 0; i < 16; i++)
      if (dg[i] != 0) begin
        if (prev < 0) n = 1;
        else n += (i - prev + 2) / 3;
        prev = i;
      end
    if (prev < 0) return 1;
    return n + (15 - prev + 2) / 3;
  endfunction

  // Supported repacking modes: input width -> output width.
  function automatic bit ref_pack_ok(int wi, int wo);
    if (wi == wo) return 1;
    case (wi)
      4:  return wo == 6 || wo == 8;
      6:  return wo == 4 || wo == 8 || wo == 12;
      8:  return wo == 4 || wo == 6 || wo == 12 || wo == 16;
      12: return wo == 6 || wo == 8 || wo == 16;
      16: return wo == 8 || wo == 12;
      default: return 0;
    endcase
  endfunction

  // Repack: list of R2's then R3's sub-words, output entries part*n_out...,
  // each value MSB-aligned (Q1 fraction kept).
  function automatic logic [WW-1:0] ref_pack(logic [WW-1:0] r2, logic [WW-1:0] r3,
                                             int wi, int wo, bit part);
    logic [WW-1:0] r;
    longint v;
    int nin, nout, idx;
    r = '0;
    nin = WW / wi;
    nout = WW / wo;
    if (!ref_pack_ok(wi, wo)) return '0;
    for (int j = 0; j < nout; j++) begin
      idx = int'(part) * nout + j;
      if (idx < 2 * nin) begin
        v = (idx < nin) ? field(r2, wi, idx) : field(r3, wi, idx - nin);
        if (wo >= wi) v = v * (longint'(1) << (wo - wi));
        else v = floordiv2k(v, wi - wo);
        r = put(r, wo, j, v);
      end
    end
    return r;
  endfunction

endpackage
