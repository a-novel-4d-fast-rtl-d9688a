// tb_model_pkg: reference model of the retina arithmetic for the testbenches, written
// from the equations of the algorithm (track line, expected hit time, Gaussian
// responses, quantisation rules of the look-up tables) independently of the RTL code.
package tb_model_pkg;

  localparam real ZF = 100.0, DZ = 40.0, ZP = 240.0, ZM = -140.0, C = 0.299792458;

  function automatic int rnd(real r);
    return (r >= 0.0) ? $rtoi(r + 0.5) : -$rtoi(-r + 0.5);
  endfunction

  function automatic int m_xp(int i); return (2 * i - 31) * 165; endfunction
  function automatic int m_xm(int j); return (2 * j - 15) * 165; endfunction

  // track (x+, x-) in 10 um units crosses layer k at
  function automatic int m_rx(int xp, int xm, int k);
    return xp + rnd(real'(xm) * (ZF + DZ * k - ZP) / ZM);
  endfunction
  function automatic real m_rx_real(real xp, real xm, int k);
    return xp + xm * (ZF + DZ * k - ZP) / ZM;
  endfunction

  // expected time (ps) at layer k for t_trk = 0
  function automatic int m_te(int xm, int k);
    real s;
    s = real'(xm) * 0.01 / ZM;
    return rnd((ZF + DZ * k) / C * $sqrt(1.0 + s * s));
  endfunction

  // quantised Gaussian responses
  function automatic int m_es(int d);
    int n; real dd;
    if (d < 0) d = -d;
    n = d / 4; if (n > 127) n = 127;
    dd = (real'(n) + 0.5) * 4.0;
    if (dd >= 440.0) return 0;
    return rnd(255.0 * $exp(-(dd * dd) / (2.0 * 220.0 * 220.0)));
  endfunction
  function automatic int m_et(int d);
    int n; real dd;
    if (d < 0) d = -d;
    n = d / 16; if (n > 127) n = 127;
    dd = (real'(n) + 0.5) * 16.0;
    return rnd(255.0 * $exp(-(dd * dd) / (2.0 * 300.0 * 300.0)));
  endfunction

  // weight contribution of hit (k, x, t) to cell (i, j) for hypothesis h = 0,1,2
  function automatic int m_w(int i, int j, int k, int x, int t, int h);
    int s, dt;
    s  = x - m_rx(m_xp(i), m_xm(j), k);
    dt = t - (m_te(m_xm(j), k) + (h - 1) * 400);
    return m_es(s) * m_et(dt);
  endfunction

endpackage
