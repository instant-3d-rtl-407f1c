// tb_util_pkg -- reference arithmetic for the testbenches, written without
// the design's FP16 functions: FP16 <-> real conversion, a tolerance compare
// and the spatial hash in 64-bit integer arithmetic.
package tb_util_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;                      // the design flushes subnormals
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  // Nearest FP16 (ties away from zero); values must lie in the normal range.
  function automatic logic [15:0] real_to_fp16(real r);
    logic s;
    int   e;
    real  a, m;
    int   mi;
    if (r == 0.0) return 16'h0000;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    mi = $rtoi((a - 1.0) * 1024.0 + 0.5);
    if (mi == 1024) begin mi = 0; e++; end
    if (e + 15 <= 0) return {s, 15'h0};
    return {s, 5'(e + 15), 10'(mi)};
  endfunction

  // |got - exp| within rel * |exp| + abs_tol
  function automatic bit close(real got, real exp, real rel, real abs_tol);
    real d, a;
    d = got - exp;  if (d < 0) d = -d;
    a = exp;        if (a < 0) a = -a;
    return d <= rel * a + abs_tol;
  endfunction

  function automatic longint unsigned ref_hash(longint unsigned x, longint unsigned y,
                                               longint unsigned z, int log2t);
    longint unsigned h;
    h = (x & 64'hFFFF_FFFF) ^ ((y * 64'd2654435761) & 64'hFFFF_FFFF)
      ^ ((z * 64'd805459861) & 64'hFFFF_FFFF);
    return h & ((64'd1 << log2t) - 1);
  endfunction

endpackage
