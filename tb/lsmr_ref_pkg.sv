// lsmr_ref_pkg -- bit-exact software model of the fixed<32,18> LSMR solver,
// written with plain longint arithmetic for the testbenches.
//
// The model restates the arithmetic rules of the hardware from their
// definitions (round to nearest with ties up, saturation to the 32-bit
// range, saturating 64-bit accumulation, truncating division with a zero
// result for a zero divisor, integer square root) and the LSMR recurrence
// in its textbook order, without using the RTL packages.  Testbenches
// compare the hardware word for word with it.
package lsmr_ref_pkg;
  localparam longint FRAC  = 18;
  localparam longint ONE   = 64'sd1 <<< FRAC;
  localparam longint WMAX  = 64'sd2147483647;
  localparam longint WMIN  = -64'sd2147483648;

  function automatic int clamp_w(input longint x);
    if (x > WMAX) return int'(WMAX);
    if (x < WMIN) return int'(WMIN);
    return int'(x);
  endfunction

  // 64-bit value with 36 fraction bits -> word, nearest, ties up
  function automatic int rnd(input longint x);
    if (x <= (WMIN <<< FRAC)) return int'(WMIN);
    if (x >= (WMAX <<< FRAC)) return int'(WMAX);
    return clamp_w((x + (64'sd1 <<< (FRAC-1))) >>> FRAC);
  endfunction

  function automatic longint sadd(input longint a, input longint b);
    logic signed [64:0] s;
    s = 65'(a) + 65'(b);
    if (s > 65'sh0_7FFF_FFFF_FFFF_FFFF) return 64'sh7FFF_FFFF_FFFF_FFFF;
    if (s < -65'sh0_8000_0000_0000_0000) return 64'sh8000_0000_0000_0000;
    return longint'(s);
  endfunction

  function automatic longint p(input int a, input int b);
    return longint'(a) * longint'(b);
  endfunction

  function automatic int mul(input int a, input int b);
    return rnd(p(a, b));
  endfunction

  function automatic int add(input int a, input int b);
    return clamp_w(longint'(a) + longint'(b));
  endfunction

  function automatic int div(input int a, input int b);
    if (b == 0) return 0;
    return clamp_w((longint'(a) * ONE) / longint'(b));
  endfunction

  function automatic longint isqrt(input longint unsigned x);
    longint unsigned r;
    r = longint'($floor($sqrt(real'(x))));
    while (r > 0 && 128'(r) * 128'(r) > 128'(x)) r--;
    while (128'(r + 1) * 128'(r + 1) <= 128'(x)) r++;
    return longint'(r);
  endfunction

  function automatic int sqrt_sumsq(input longint s);
    return clamp_w(isqrt(longint'(unsigned'(s))));
  endfunction

  function automatic int iabs(input int a);
    return (a < 0) ? clamp_w(-longint'(a)) : a;
  endfunction

  function automatic int sgn(input int a);
    return (a < 0) ? -int'(ONE) : int'(ONE);
  endfunction

  task automatic sym(input int a, input int b, output int c, output int s, output int r);
    int tau, q, sq, k1;
    if (iabs(b) > iabs(a)) begin
      tau = div(a, b);
      q   = add(int'(ONE), mul(tau, tau));
      sq  = clamp_w(isqrt(longint'(q) <<< FRAC));
      k1  = div(sgn(b), sq);
      s = k1; c = mul(k1, tau); r = div(b, k1);
    end else begin
      tau = div(b, a);
      q   = add(int'(ONE), mul(tau, tau));
      sq  = clamp_w(isqrt(longint'(q) <<< FRAC));
      k1  = div(sgn(a), sq);
      c = k1; s = mul(k1, tau); r = div(a, k1);
    end
  endtask

  // y = A*x - scale*w, one rounding; accumulates ||y||^2
  // A is m x n row-major.
  task automatic lsmr(input int m, input int n, input int A[], input int b[],
                      output int x[]);
    int u[], v[], h[], hb[];
    longint acc, ss;
    int alpha, beta, alphabar, zetabar, zeta, rho, rhobar, cbar, sbar;
    int c, s, rn, cbn, sbn, rbn, coef1, coef2, coef3, t;
    u = new[m]; v = new[n]; h = new[n]; hb = new[n]; x = new[n];
    foreach (x[j]) x[j] = 0;
    ss = 0;
    for (int i = 0; i < m; i++) begin
      u[i] = rnd(p(b[i], int'(ONE)));
      ss = sadd(ss, p(u[i], u[i]));
    end
    beta = sqrt_sumsq(ss);
    for (int i = 0; i < m; i++) u[i] = div(u[i], beta);
    ss = 0;
    for (int j = 0; j < n; j++) begin
      acc = 0;
      for (int i = 0; i < m; i++) acc = sadd(acc, p(A[i*n+j], u[i]));
      v[j] = rnd(acc);
      ss = sadd(ss, p(v[j], v[j]));
    end
    alpha = sqrt_sumsq(ss);
    for (int j = 0; j < n; j++) begin
      v[j] = div(v[j], alpha); h[j] = v[j]; hb[j] = 0;
    end
    alphabar = alpha; zetabar = mul(alpha, beta);
    rho = int'(ONE); rhobar = int'(ONE); cbar = int'(ONE); sbar = 0;
    for (int k = 0; k < ((m < n) ? m : n); k++) begin
      ss = 0;
      for (int i = 0; i < m; i++) begin
        acc = 0;
        for (int j = 0; j < n; j++) acc = sadd(acc, p(A[i*n+j], v[j]));
        acc = sadd(acc, -p(alpha, u[i]));
        u[i] = rnd(acc);
        ss = sadd(ss, p(u[i], u[i]));
      end
      beta = sqrt_sumsq(ss);
      for (int i = 0; i < m; i++) u[i] = div(u[i], beta);
      ss = 0;
      for (int j = 0; j < n; j++) begin
        acc = 0;
        for (int i = 0; i < m; i++) acc = sadd(acc, p(A[i*n+j], u[i]));
        acc = sadd(acc, -p(beta, v[j]));
        v[j] = rnd(acc);
        ss = sadd(ss, p(v[j], v[j]));
      end
      alpha = sqrt_sumsq(ss);
      for (int j = 0; j < n; j++) v[j] = div(v[j], alpha);
      sym(alphabar, beta, c, s, rn);
      sym(mul(cbar, rn), mul(s, alpha), cbn, sbn, rbn);
      alphabar = mul(c, alpha);
      zeta     = mul(cbn, zetabar);
      zetabar  = clamp_w(-longint'(mul(sbn, zetabar)));
      coef1 = div(mul(mul(sbar, rn), rn), mul(rho, rhobar));
      coef2 = div(zeta, mul(rn, rbn));
      coef3 = div(mul(s, alpha), rn);
      for (int j = 0; j < n; j++) begin
        t     = rnd(sadd(longint'(h[j]) <<< FRAC, -p(coef1, hb[j])));
        hb[j] = t;
        x[j]  = rnd(sadd(longint'(x[j]) <<< FRAC, p(coef2, t)));
        h[j]  = rnd(sadd(longint'(v[j]) <<< FRAC, -p(coef3, h[j])));
      end
      rho = rn; rhobar = rbn; cbar = cbn; sbar = sbn;
    end
  endtask

  function automatic int to_fx(input real r);
    return clamp_w(longint'($floor(r * real'(ONE) + 0.5)));
  endfunction

  function automatic real to_r(input int f);
    return real'(f) / real'(ONE);
  endfunction
endpackage
