// loren_ref_pkg: bit-exact software reference of the LOREN layers, used by
// the testbenches to compute expected outputs independently of the RTL.
//
// Tensors are flat int arrays, cell-major: x[(t*F + f)*C + c]. Kernels are
// w[((o*CIN) + i)*9 + k] with tap k = 3*ky + kx. Adapter matrices of one
// code rate are a[c*R + j] (A, CIN x R) and b[o*R + j] (B^T, COUT x R).
// LayerNorm gamma/beta are g[(t*F + f)*C + c]. The arithmetic follows the
// fixed-point rules written in the RTL headers (Q7.8 words, floor shifts,
// saturation to 16 bits).
package loren_ref_pkg;

  localparam int FRAC = 8;

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic longint isqrt(input longint v);
    longint lo, hi, mid;
    lo = 0; hi = 64'd3037000499;
    while (lo < hi) begin
      mid = (lo + hi + 1) / 2;
      if (mid * mid <= v) lo = mid; else hi = mid - 1;
    end
    return lo;
  endfunction

  // Low-rank adapter: delta[o] with 2*FRAC fraction bits.
  function automatic void adapter_ref(input int CIN, COUT, R, ALPHA,
                                      input int x[], input int a[], input int b[],
                                      output longint delta[]);
    int h[];
    int sh;
    h = new[R];
    delta = new[COUT];
    sh = $clog2(R);
    for (int j = 0; j < R; j++) begin
      longint s = 0;
      for (int c = 0; c < CIN; c++) s += longint'(x[c]) * a[c*R + j];
      h[j] = sat16(s >>> FRAC);
    end
    for (int o = 0; o < COUT; o++) begin
      longint s = 0;
      for (int j = 0; j < R; j++) s += longint'(h[j]) * b[o*R + j];
      delta[o] = (s * ALPHA) >>> sh;
    end
  endfunction

  // 3x3 'same' convolution with bias, optional adapter and optional skip.
  function automatic void conv_ref(input int T, F, CIN, COUT,
                                   input int x[], input int w[], input int bias[],
                                   input bit use_skip, input int skip[],
                                   input bit use_lor, input int R, ALPHA,
                                   input int a[], input int b[],
                                   output int y[]);
    y = new[T*F*COUT];
    for (int t = 0; t < T; t++)
      for (int f = 0; f < F; f++) begin
        longint delta[];
        int xc[];
        xc = new[CIN];
        for (int c = 0; c < CIN; c++) xc[c] = x[(t*F + f)*CIN + c];
        if (use_lor) adapter_ref(CIN, COUT, R, ALPHA, xc, a, b, delta);
        for (int o = 0; o < COUT; o++) begin
          longint acc = 0;
          for (int i = 0; i < CIN; i++)
            for (int k = 0; k < 9; k++) begin
              int nt = t + k/3 - 1, nf = f + k%3 - 1;
              if (nt >= 0 && nt < T && nf >= 0 && nf < F)
                acc += longint'(x[(nt*F + nf)*CIN + i]) * w[((o*CIN) + i)*9 + k];
            end
          acc += longint'(bias[o]) <<< FRAC;
          if (use_lor) acc += delta[o];
          acc = acc >>> FRAC;
          if (use_skip) acc += skip[(t*F + f)*COUT + o];
          y[(t*F + f)*COUT + o] = sat16(acc);
        end
      end
  endfunction

  // Layer normalisation over the whole tensor with per-element gamma/beta.
  function automatic void ln_ref(input int T, F, C, EPS, GBITS,
                                 input int x[], input int g[], input int be[],
                                 output int y[]);
    longint s1 = 0, s2 = 0, n, mean, e2, vr, sd, inv;
    n = longint'(T) * F * C;
    y = new[T*F*C];
    for (int i = 0; i < T*F*C; i++) begin
      s1 += x[i];
      s2 += longint'(x[i]) * x[i];
    end
    mean = s1 / n;
    e2   = s2 / n;
    vr   = e2 - mean * mean;
    vr   = (vr < 0) ? EPS : vr + EPS;
    sd   = isqrt(vr);
    inv  = (longint'(1) <<< (FRAC + GBITS)) / sd;
    for (int i = 0; i < T*F*C; i++) begin
      longint nrm = ((x[i] - mean) * inv) >>> GBITS;
      y[i] = sat16(((nrm * g[i]) >>> FRAC) + be[i]);
    end
  endfunction

  // Uniform random integer in [-m, m].
  function automatic int rnd(input int m);
    return int'($urandom_range(2*m)) - m;
  endfunction

endpackage
