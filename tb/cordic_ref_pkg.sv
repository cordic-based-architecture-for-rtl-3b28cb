// cordic_ref_pkg: reference models used by the testbenches.
//
// Bit-accurate integer models of the negative and positive CORDIC
// iterations (signed [B FW] values held in longint, so B <= 64, wrapped to B
// bits after every operation), the CORDIC gain An of equation (6) computed
// with real arithmetic, and fixed-point/real conversions. They are written
// from the iteration equations, not from the RTL.
package cordic_ref_pkg;

  function automatic longint wrap(longint v, int unsigned b);
    return (v <<< (64 - b)) >>> (64 - b);
  endfunction

  function automatic longint to_fx(real r, int unsigned fw);
    return longint'(r * (2.0 ** fw));
  endfunction

  function automatic real to_real(longint v, int unsigned fw);
    return real'(v) / (2.0 ** fw);
  endfunction

  function automatic real atanh(real t);
    return 0.5 * $ln((1.0 + t) / (1.0 - t));
  endfunction

  // An = prod_{i=-M..0} sqrt(1-(1-2^(i-2))^2) * prod_{i=1..N} sqrt(1-2^-2i),
  // with the repeated iterations counted twice.
  function automatic real gain(int unsigned m, int unsigned n);
    real g, t;
    int unsigned k;
    g = 1.0;
    for (int i = -int'(m); i <= 0; i++) begin
      t = 1.0 - 2.0 ** (i - 2);
      g *= $sqrt(1.0 - t * t);
    end
    for (int unsigned i = 1; i <= n; i++) begin
      g *= $sqrt(1.0 - 2.0 ** (-2.0 * i));
      k = 4;
      while (k < i) k = 3 * k + 1;
      if (k == i) g *= $sqrt(1.0 - 2.0 ** (-2.0 * i));
    end
    return g;
  endfunction

  function automatic bit repeated(int unsigned i);
    int unsigned k;
    k = 4;
    while (k < i) k = 3 * k + 1;
    return k == i;
  endfunction

  // delta = -1 is returned as 1
  function automatic bit delta_neg(bit vectoring, longint x, longint y, longint z);
    if (!vectoring) return z < 0;
    return (x == 0) || (y == 0) || ((x < 0) == (y < 0));
  endfunction

  // One negative iteration i = -k.
  function automatic void neg_iter(bit vectoring, int unsigned k, int unsigned b, int unsigned fw,
                          inout longint x, inout longint y, inout longint z);
    longint th, xn, yn;
    bit dn;
    th = to_fx(0.5 * $ln(2.0 ** (k + 3) - 1.0), fw);
    dn = delta_neg(vectoring, x, y, z);
    if (dn) begin
      xn = x - y + (y >>> (k + 2));
      yn = y - x + (x >>> (k + 2));
      z  = wrap(z + th, b);
    end else begin
      xn = x + y - (y >>> (k + 2));
      yn = y + x - (x >>> (k + 2));
      z  = wrap(z - th, b);
    end
    x = wrap(xn, b);
    y = wrap(yn, b);
  endfunction

  // One positive iteration i.
  function automatic void pos_iter(bit vectoring, int unsigned i, int unsigned b, int unsigned fw,
                          inout longint x, inout longint y, inout longint z);
    longint th, xn, yn;
    bit dn;
    th = to_fx(atanh(2.0 ** (-1.0 * i)), fw);
    dn = delta_neg(vectoring, x, y, z);
    if (dn) begin
      xn = x - (y >>> i);
      yn = y - (x >>> i);
      z  = wrap(z + th, b);
    end else begin
      xn = x + (y >>> i);
      yn = y + (x >>> i);
      z  = wrap(z - th, b);
    end
    x = wrap(xn, b);
    y = wrap(yn, b);
  endfunction

  // A whole engine pass.
  function automatic void engine(bit vectoring, int unsigned m, int unsigned n, int unsigned b,
                        int unsigned fw, inout longint x, inout longint y, inout longint z);
    for (int k = int'(m); k >= 0; k--) neg_iter(vectoring, k, b, fw, x, y, z);
    for (int unsigned i = 1; i <= n; i++) begin
      pos_iter(vectoring, i, b, fw, x, y, z);
      if (repeated(i)) pos_iter(vectoring, i, b, fw, x, y, z);
    end
  endfunction

endpackage
