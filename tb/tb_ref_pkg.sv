// tb_ref_pkg: reference arithmetic for the testbenches, written independently of the
// design's own helpers. 16-bit data with 8 fraction bits; every add and multiply
// result is clamped to [-32768, 32767]; products drop 8 bits with a floor shift.
// Also generates piecewise-linear sigmoid/tanh coefficients (chords of the function
// over 16 unit-wide pieces on [-8, 8)) and evaluates them the way the hardware does.
package tb_ref_pkg;
  localparam int NB = 16;
  localparam int FB = 8;
  localparam int SEGS = 16;

  function automatic int clamp(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int rmul(input int a, input int b);
    longint p;
    p = longint'(a) * longint'(b);
    return clamp(p >>> FB);
  endfunction

  function automatic int radd(input int a, input int b);
    return clamp(longint'(a) + longint'(b));
  endfunction

  // Ternary saturating reduction in the order the tree adder uses.
  function automatic int rtree(input int v[], input int n);
    int cur[];
    int nxt[];
    int m;
    cur = new[n];
    for (int k = 0; k < n; k++) cur[k] = v[k];
    m = n;
    while (m > 1) begin
      int nm;
      nm = (m + 2) / 3;
      nxt = new[nm];
      for (int j = 0; j < nm; j++) begin
        longint s;
        s = cur[3*j];
        if (3*j+1 < m) s += cur[3*j+1];
        if (3*j+2 < m) s += cur[3*j+2];
        nxt[j] = clamp(s);
      end
      cur = nxt;
      m = nm;
    end
    return cur[0];
  endfunction

  function automatic real fsig(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic real ftanh(input real x);
    return (($exp(x) - $exp(-x)) / ($exp(x) + $exp(-x)));
  endfunction

  // Chord of piece s (covers [(s-8)/2, (s-7)/2)): a and b as 8-fraction-bit integers.
  function automatic int coef_a(input bit is_tanh, input int s);
    real x0, x1, y0, y1;
    x0 = real'(s - SEGS/2) / 2.0;
    x1 = x0 + 0.5;
    y0 = is_tanh ? ftanh(x0) : fsig(x0);
    y1 = is_tanh ? ftanh(x1) : fsig(x1);
    return int'((y1 - y0) * 2.0 * 256.0);
  endfunction

  function automatic int coef_b(input bit is_tanh, input int s);
    real x0, y0;
    x0 = real'(s - SEGS/2) / 2.0;
    y0 = is_tanh ? ftanh(x0) : fsig(x0);
    return int'((y0 - real'(coef_a(is_tanh, s)) / 256.0 * x0) * 256.0);
  endfunction

  function automatic int rpwl(input bit is_tanh, input int x);
    int xc, s;
    xc = x;
    if (xc > 4*256-1) xc = 4*256-1;
    if (xc < -4*256) xc = -4*256;
    s = (xc >>> (FB - 1)) + SEGS/2;
    return radd(rmul(coef_a(is_tanh, s), xc), coef_b(is_tanh, s));
  endfunction

  // Signed view of a 16-bit word.
  function automatic int s16(input logic [15:0] w);
    return int'(signed'(w));
  endfunction
endpackage
