// fp16_ref_pkg: reference conversions between IEEE binary16 and real for the
// testbenches, written with real arithmetic only (independent of the
// design's bit-level FP16 functions). Subnormals are flushed to zero, as in
// the design; rounding is to nearest, ties to even.
package fp16_ref_pkg;
  function automatic real fp16_to_real(logic [15:0] h);
    real m;
    int e;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(real r);
    logic s;
    int e;
    real a, m, f;
    longint q;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a == 0.0) return {s, 15'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    m = (a - 1.0) * 1024.0;
    q = longint'($floor(m));
    f = m - real'(q);
    if (f > 0.5 || (f == 0.5 && q[0])) q++;
    if (q == 1024) begin q = 0; e++; end
    if (e + 15 >= 31) return {s, 15'h7C00};
    if (e + 15 <= 0) return {s, 15'd0};
    return {s, 5'(e + 15), 10'(q)};
  endfunction

  // Random FP16 value of magnitude within [2^lo, 2^hi), either sign.
  function automatic logic [15:0] rand_fp16(int lo, int hi);
    int e;
    e = lo + int'($urandom_range(0, hi - lo - 1));
    return {1'($urandom), 5'(e + 15), 10'($urandom)};
  endfunction

  function automatic real rabs(real a);
    return a < 0.0 ? -a : a;
  endfunction
endpackage
