// cordic_pkg: types and elaboration-time helpers shared by the expanded
// hyperbolic CORDIC engine and the powering (x^y) unit.
//
// All datapath values use one signed two's-complement fixed-point format
// [B FW]: B bits in total, FW of them fractional, IW = B - FW integer bits.
// The helpers below are evaluated only at elaboration (parameters and
// localparams); none of them becomes hardware.
//
//   cordic_mode_t   ROTATION (z is driven to 0) or VECTORING (y is driven to 0)
//   is_repeat(i)    1 for the positive iterations that are executed twice:
//                   4, 13, 40, ... (k -> 3k+1), as the convergence rule of
//                   hyperbolic CORDIC requires
//   num_repeats(N)  v(N): how many of the iterations 1..N are repeated
//   exec_cycles     M+1+N+v(N)+2, clock cycles of one engine pass
//   to_fixed(r,FW)  round a real to a [.. FW] integer (limited to 64 bits)
//   neg_theta(k,FW) atanh(1-2^-(k+2)) for the negative iteration i=-k, using
//                   atanh(1-2^-j) = ln(2^(j+1)-1)/2
//   pos_theta(i,FW) atanh(2^-i) for the positive iteration i
package cordic_pkg;

  typedef enum logic {
    ROTATION  = 1'b0,
    VECTORING = 1'b1
  } cordic_mode_t;

  function automatic bit is_repeat(int unsigned i);
    int unsigned k;
    k = 4;
    while (k <= i) begin
      if (k == i) return 1'b1;
      k = 3 * k + 1;
    end
    return 1'b0;
  endfunction

  function automatic int unsigned num_repeats(int unsigned n);
    int unsigned cnt;
    cnt = 0;
    for (int unsigned i = 1; i <= n; i++) if (is_repeat(i)) cnt++;
    return cnt;
  endfunction

  function automatic int unsigned exec_cycles(int unsigned m, int unsigned n);
    return m + 1 + n + num_repeats(n) + 2;
  endfunction

  function automatic longint to_fixed(real r, int unsigned fw);
    return longint'(r * (2.0 ** fw));
  endfunction

  function automatic longint neg_theta(int unsigned k, int unsigned fw);
    return to_fixed(0.5 * $ln(2.0 ** (k + 3) - 1.0), fw);
  endfunction

  function automatic longint pos_theta(int unsigned i, int unsigned fw);
    real t;
    t = 2.0 ** (-1.0 * i);
    return to_fixed(0.5 * $ln((1.0 + t) / (1.0 - t)), fw);
  endfunction

endpackage
