// tb_util_pkg: reference arithmetic shared by the testbenches (FP16 <-> real,
// the exponent look-up table contents, UQ1.15 helpers). Not part of the design.
package tb_util_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    int  e;
    real m, v;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    v = m * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  // Nearest FP16 for a normal value (|v| in [2^-14, 65504]); 0 for |v| < 2^-14.
  function automatic logic [15:0] real_to_fp16(real v);
    logic s;
    int   e;
    real  a, m;
    int   mi;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a < (2.0 ** -14)) return 16'h0000;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m  = (a - 1.0) * 1024.0;
    mi = int'(m);             // round to nearest
    if (mi == 1024) begin mi = 0; e++; end
    return {s, 5'(e + 15), 10'(mi)};
  endfunction

  // LUT entry k of stage s: 2^(k / 8^(s+1)) in UQ1.15.
  function automatic logic [15:0] lut_value(int s, int k);
    real v;
    v = 2.0 ** (real'(k) / (8.0 ** (s + 1)));
    return 16'(int'(v * 32768.0));
  endfunction

  function automatic real fix_to_real(logic [15:0] f);
    return real'(f) / 32768.0;
  endfunction

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Reference for the merged Gaussian argument x' = -q/2 (see pixel_preproc).
  function automatic real ref_xprime(int u, int v, int t, int mx, int my, int ca, int cb,
                                     int cc, int mt, int lam);
    real dx, dy, dt, q;
    dx = real'(u - mx) / 16.0;
    dy = real'(v - my) / 16.0;
    dt = real'(t - mt) / 4096.0;
    q  = (real'(ca) * dx * dx + 2.0 * real'(cb) * dx * dy + real'(cc) * dy * dy) / 4096.0
       + real'(lam) / 4096.0 * dt * dt;
    return -q / 2.0;
  endfunction

endpackage
