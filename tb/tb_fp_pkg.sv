// tb_fp_pkg: reference fp16 conversions for the testbenches, written with
// real arithmetic and independent of the RTL functions: fp16 -> real, and
// real -> fp16 rounded to nearest even with subnormals flushed to zero.
package tb_fp_pkg;

  function automatic real h2r(logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(real x);
    logic s;
    real  ax, m, fl;
    int   e;
    longint r;
    if (x == 0.0) return 16'h0;
    s  = (x < 0.0);
    ax = s ? -x : x;
    e  = 0;
    while (ax >= 2.0) begin ax = ax / 2.0; e++; end
    while (ax < 1.0)  begin ax = ax * 2.0; e--; end
    m  = ax * 1024.0;
    fl = $floor(m);
    r  = longint'(fl);
    if (m - fl > 0.5 || (m - fl == 0.5 && r[0])) r++;
    if (r == 2048) begin r = 1024; e++; end
    if (e + 15 <= 0)  return {s, 15'h0};
    if (e + 15 >= 31) return {s, 5'h1f, 10'h0};
    return {s, 5'(e + 15), 10'(r - 1024)};
  endfunction

  // random normal fp16 with exponent in [15-span, 15+span]
  function automatic logic [15:0] rand_h(int span);
    int e;
    e = 15 - span + int'($urandom_range(0, 2 * span));
    return {1'($urandom_range(0, 1)), 5'(e), 10'($urandom_range(0, 1023))};
  endfunction

endpackage
