// tnn_ref_pkg: reference model of the clustering processor, used by the
// end-to-end testbenches.  It recomputes the projection matrix from its
// hash, encodes with floating-point Gaussians, integrates ramp-no-leak
// potentials tick by tick from their definition and applies 1-WTA, so the
// whole forward pass can be predicted from the signal, the column ranges and
// the weights read back from the hardware.
package tnn_ref_pkg;

  function automatic int coef(logic [31:0] s, int n, int i);
    logic [31:0] v; int c;
    v = s ^ (32'(n) * 32'h9E3779B1) ^ (32'(i) * 32'h85EBCA77);
    v = v ^ (v >> 15); v = v * 32'h2C1B3C6D;
    v = v ^ (v >> 12); v = v * 32'h297A2D39;
    v = v ^ (v >> 15);
    c = (int'(v[15:0]) * 6) >>> 16;
    return (c == 0) ? 1 : (c == 1) ? -1 : 0;
  endfunction

  // spike time of receptive field j for value xv in column range [mn, mx]
  // (u resolved to 1/64 and truncated towards zero, as in the hardware)
  function automatic int enc_t(int xv, int mn, int mx, int g, int j, int e, int tmax);
    longint num, den, uq;
    real a;
    int r;
    r   = (mx - mn <= 0) ? 1 : mx - mn;
    num = longint'(xv - mn) * (e - 2) * 1024;
    den = longint'(r) * ((g == 0) ? 1 : g);
    uq  = num / den;
    a   = real'(uq) / 64.0 - real'(j) + 1.5;
    return int'($floor(real'(tmax) * (1.0 - $exp(-0.5 * a * a)) + 0.5));
  endfunction

  function automatic int rho(int t, int w);
    if (t < 0) return 0;
    if (t < w) return t;
    return w;
  endfunction

endpackage
