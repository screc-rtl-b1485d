// tb_fp_pkg: reference single-precision arithmetic for the testbenches,
// computed independently of the RTL through the simulator's double-precision
// `real` type. fp32 operands convert exactly to double; the double result is
// rounded to single precision (nearest, ties to even) with subnormals flushed
// to zero, matching the RTL's conventions. Rounding first to double and then
// to single gives the correctly rounded single result for +, *, / since
// 53 >= 2*24 + 2. Also holds a small random generator of well-scaled values.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, s;
    d = $realtobits(r);
    if (d[62:52] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    g = d[28];
    s = |d[27:0];
    if (g && (s || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] ref_div(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) / f2r(b));
  endfunction

  // random value with exponent in [127-lo, 127+hi]
  function automatic logic [31:0] rand_fp(input int lo = 8, input int hi = 8);
    logic [31:0] v;
    int e;
    e = 127 - lo + int'($urandom_range(lo + hi));
    v = {1'($urandom), 8'(e), 23'($urandom)};
    return v;
  endfunction

  // small exact values (k/8) keep long accumulations exact
  function automatic logic [31:0] small_fp(input int k);
    return r2f(real'(k) / 8.0);
  endfunction

  // contents of a simulated embedding-table word: a value in [-2, 2] in
  // steps of 1/8, a fixed hash of the storage tier and the 32-bit word
  // address (byte address / 4)
  function automatic logic [31:0] table_word(input int tier, input longint waddr);
    longint unsigned h;
    h = longint'(waddr) * 64'd2654435761 + longint'(tier) * 64'd40503 + 64'd12345;
    h = h ^ (h >> 13);
    return small_fp(int'(h % 33) - 16);
  endfunction

endpackage
