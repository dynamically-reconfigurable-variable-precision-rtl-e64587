// tb_ref_pkg: reference arithmetic for the FADES testbenches, written
// independently of the RTL: TensorFlow Lite int8 requantisation using
// 64-bit integer division, and float32 <-> real conversions done through
// the IEEE-754 double format.
package tb_ref_pkg;

  function automatic int srdhm_ref(int a, int b);
    longint ab, nudge;
    if (a == 32'sh8000_0000 && b == 32'sh8000_0000) return 32'sh7FFF_FFFF;
    ab    = longint'(a) * longint'(b);
    nudge = (ab >= 0) ? (longint'(1) <<< 30) : (longint'(1) - (longint'(1) <<< 30));
    return int'((ab + nudge) / (longint'(1) <<< 31));
  endfunction

  function automatic int rdbpot_ref(int x, int e);
    longint pow, q, r;
    // round half away from zero of x / 2^e
    pow = longint'(1) <<< e;
    q = longint'(x) / pow;
    r = longint'(x) - q * pow;
    if (x >= 0) begin
      if (2 * r >= pow && e > 0) q = q + 1;
    end else begin
      if (-2 * r >= pow && e > 0) q = q - 1;
    end
    return int'(q);
  endfunction

  function automatic int requant_ref(int acc, int bias, int qm, int shift, int cmin, int cmax);
    int v, ls, rs;
    ls = (shift > 0) ? shift : 0;
    rs = (shift > 0) ? 0 : -shift;
    v  = acc + bias;
    v  = int'(longint'(v) * (longint'(1) <<< ls));
    v  = rdbpot_ref(srdhm_ref(v, qm), rs);
    if (v > cmax) v = cmax;
    if (v < cmin) v = cmin;
    return v;
  endfunction

  // float32 bit pattern -> real (normal numbers and zero)
  function automatic real f2r(logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    m = m * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  // real -> float32 bit pattern, round to nearest even, normal range only
  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic [52:0] man;
    logic [24:0] m24;
    logic        g, s;
    int          e;
    if (r == 0.0) return 32'd0;
    d   = $realtobits(r);
    e   = int'(d[62:52]) - 1023 + 127;
    man = {1'b1, d[51:0]};
    m24 = {1'b0, man[52:29]};
    g   = man[28];
    s   = |man[27:0];
    if (g && (s || m24[0])) m24 = m24 + 1;
    if (m24[24]) begin m24 = m24 >> 1; e = e + 1; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m24[22:0]};
  endfunction

endpackage
