// cr_ref_pkg: reference arithmetic for the testbenches.
//
// Integer models of the fixed-point operations of the compensation engine,
// written with plain 64-bit integer arithmetic (no RTL types), so that the
// testbenches can compute expected results independently of the design:
// Q6.12 saturation, one polynomial lattice element, the objective function
// (relative errors, quadratic sum, integer square root) and the settings
// decoding. Values are carried as longint, one per number.
package cr_ref_pkg;

  localparam int  FR   = 12;
  localparam longint MAXV = 131071;
  localparam longint MINV = -131072;

  function automatic longint sat(input longint x);
    if (x > MAXV) return MAXV;
    if (x < MINV) return MINV;
    return x;
  endfunction

  // Arithmetic shift right of a signed 64-bit value
  function automatic longint asr(input longint x, input int n);
    return x >>> n;
  endfunction

  // One element: v = {1.0, state[10], phi, v, b}; NT terms
  function automatic void poly(input longint st[10], input longint set3[3],
                               input longint w[10][16], input int a[16], input int b[16],
                               output longint o[10]);
    longint v[14];
    longint ph[16];
    v[0] = 4096;
    for (int i = 0; i < 10; i++) v[1+i] = st[i];
    for (int i = 0; i < 3; i++) v[11+i] = set3[i];
    for (int j = 0; j < 16; j++) ph[j] = sat(asr(v[a[j]] * v[b[j]], FR));
    for (int k = 0; k < 10; k++) begin
      longint s;
      s = 0;
      for (int j = 0; j < 16; j++) s += w[k][j] * ph[j];
      o[k] = sat(asr(s, FR));
    end
  endfunction

  function automatic longint isqrt(input longint x);
    longint r;
    r = 0;
    for (int bit_i = 19; bit_i >= 0; bit_i--) begin
      longint t;
      t = r | (longint'(1) << bit_i);
      if (t * t <= x) r = t;
    end
    return r;
  endfunction

  // Objective: positions {E, AX, BX, AY, BY, AZ, BZ}
  function automatic longint objective(input longint st[10], input longint nom[10], input longint inv[7]);
    int pos[7];
    longint s;
    pos = '{0, 1, 2, 4, 5, 7, 8};
    s = 0;
    for (int k = 0; k < 7; k++) begin
      longint e;
      e = sat(asr((st[pos[k]] - nom[pos[k]]) * inv[k], FR));
      s += e * e;
    end
    return isqrt(s);
  endfunction

endpackage
