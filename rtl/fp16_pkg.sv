// fp16_pkg: half-precision (IEEE binary16 layout) multiply and add functions.
//
// The paper rates the array in fp16 operations; it does not give the
// arithmetic details, so this design uses the simplest consistent rules:
// round to nearest, ties to even; subnormal inputs and results are flushed
// to zero; an exponent of 31 is read as infinity and overflow saturates to
// infinity of the right sign. NaN is not produced.
package fp16_pkg;

  typedef logic [15:0] fp16_t;
  localparam fp16_t FP16_ZERO = 16'h0000;

  function automatic fp16_t fp16_pack(logic s, int e, logic [10:0] m11);
    // m11: hidden bit + 10 fraction bits, already rounded
    if (e <= 0)  return {s, 15'h0};
    if (e >= 31) return {s, 5'h1f, 10'h0};
    return {s, e[4:0], m11[9:0]};
  endfunction

  // round {mant(10), guard, sticky} to nearest even; returns exponent change
  function automatic fp16_t fp16_round(logic s, int e, logic [10:0] m11, logic g, logic st);
    logic [11:0] r;
    int          en;
    r  = {1'b0, m11};
    en = e;
    if (g && (st || m11[0])) r = r + 12'd1;
    if (r[11]) begin
      r  = r >> 1;
      en = en + 1;
    end
    return fp16_pack(s, en, r[10:0]);
  endfunction

  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    int          e;
    logic [21:0] p;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 15'h0};
    if (a[14:10] == 5'd31 || b[14:10] == 5'd31) return {s, 5'h1f, 10'h0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) return fp16_round(s, e + 1, p[21:11], p[10], |p[9:0]);
    else       return fp16_round(s, e,     p[20:10], p[9],  |p[8:0]);
  endfunction

  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t       x, y;
    logic [14:0] mx, my, sum;
    int          ex, d, lz;
    logic        st;
    if (a[14:10] == 5'd0) return (b[14:10] == 5'd0) ? FP16_ZERO : b;
    if (b[14:10] == 5'd0) return a;
    if (a[14:10] == 5'd31) return a;
    if (b[14:10] == 5'd31) return b;
    // x = operand of larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    ex = int'(x[14:10]);
    d  = ex - int'(y[14:10]);
    mx = {1'b0, 1'b1, x[9:0], 3'b000};
    my = {1'b0, 1'b1, y[9:0], 3'b000};
    if (d >= 14) my = 15'd1;                // only sticky survives
    else if (d > 0) begin
      st = |(my & ((15'd1 << d) - 15'd1));
      my = (my >> d) | {14'd0, st};
    end
    if (x[15] == y[15]) begin
      sum = mx + my;
      if (sum[14]) begin
        sum = {1'b0, sum[14:1]} | {14'd0, sum[0]};
        ex  = ex + 1;
      end
    end else begin
      sum = mx - my;
      if (sum == 15'd0) return FP16_ZERO;
      lz = 0;
      for (int i = 0; i < 14; i++) if (sum[13 - i] && lz == 0) lz = i + 1;
      lz  = lz - 1;                         // leading zeros above the hidden bit
      sum = sum << lz;
      ex  = ex - lz;
    end
    return fp16_round(x[15], ex, sum[13:3], sum[2], sum[1] | sum[0]);
  endfunction

endpackage
