// cac_ref_pkg: bit-accurate software model of the CAC solver, used by the testbenches
// to work out expected results independently of the RTL. It follows the algorithm of
// one iteration (product and energy, best-configuration capture, n_x x sweeps, n_e e
// sweeps, modulation update) with the same fixed-point word (18 bits, 12 fraction
// bits), the same one-LSB approximation of the even-column products and the same
// piecewise-linear tanh, written with plain integer arithmetic.
package cac_ref_pkg;
  function automatic longint satv(input longint v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return v;
  endfunction
  function automatic longint fm(input longint a, input longint b);
    return satv((a * b) >>> 12);
  endfunction
  function automatic int tern(input int w);
    if (w == 1) return 1;
    if (w == 3) return -1;
    return 0;
  endfunction
  // product used by the hardware: column c of a block; even columns use ~x for -x
  function automatic longint wprod(input longint x, input int w, input int c);
    int t;
    t = tern(w);
    if (t == 0) return 0;
    if (t == 1) return x;
    return (c % 2 == 0) ? (-x - 1) : -x;
  endfunction
  function automatic longint tanh_pwl(input longint z);
    longint tbl[17] = '{0, 1003, 1893, 2602, 3119, 3475, 3707, 3856, 3949, 4006, 4041,
                        4063, 4076, 4084, 4089, 4091, 4093};
    longint m, r;
    int idx;
    m = (z < 0) ? -z : z;
    if (m >= 16384) r = tbl[16];
    else begin
      idx = int'(m >> 10);
      r = tbl[idx] + (((tbl[idx+1] - tbl[idx]) * (m & 1023)) >> 10);
    end
    return (z < 0) ? -r : r;
  endfunction

  class cac_model;
    int n, u, nb;
    int w[][];            // w[i][j], 2-bit codes
    longint x[], e[], x2[], mv[];
    bit best[];
    bit sig[];
    longint beta, p, alpha, rho, delta, e_max;
    longint unsigned gamma, tau;
    int n_x, n_e, dtx, dte;
    longint h, h_opt, nu, nu_c, nu_opt;
    longint unsigned xi_acc;
    longint a;
    int improvements, resets;

    function new(int n_, int u_);
      n = n_; u = u_; nb = (n + u - 1) / u;
      w = new[nb*u];
      foreach (w[i]) begin w[i] = new[nb*u]; foreach (w[i][j]) w[i][j] = 0; end
      x = new[nb*u]; e = new[nb*u]; x2 = new[nb*u]; mv = new[nb*u];
      best = new[nb*u]; sig = new[nb*u];
      foreach (x[i]) begin x[i] = 0; e[i] = 0; x2[i] = 0; mv[i] = 0; best[i] = 0; end
    endfunction

    function void start();
      h_opt = 64'sd2147483647; nu = 0; nu_c = 0; nu_opt = 0; xi_acc = 0; a = alpha;
      improvements = 0; resets = 0;
    endfunction

    function longint energy_of(bit s[]);
      longint t;
      t = 0;
      for (int i = 0; i < nb*u; i++)
        for (int j = 0; j < nb*u; j++)
          t += (s[i] ? -1 : 1) * tern(w[i][j]) * (s[j] ? -1 : 1);
      return -(t >>> 1);
    endfunction

    function void iterate();
      longint xb[];
      longint dh, z, th, anew, xi;
      xb = new[nb*u];
      foreach (x[j]) begin xb[j] = fm(x[j], beta); sig[j] = (x[j] < 0); end
      foreach (mv[i]) begin
        mv[i] = 0;
        foreach (x[j]) mv[i] += wprod(xb[j], w[i][j], j % u);
      end
      h = energy_of(sig);
      if (h < h_opt) foreach (best[i]) best[i] = sig[i];
      for (int k = 0; k < n_x; k++)
        foreach (x[i]) begin
          longint inj, g, f, d;
          x2[i] = fm(x[i], x[i]);
          inj = satv((e[i] * mv[i]) >>> 12);
          g = satv(satv(p - 4096) - x2[i]);
          f = fm(g, x[i]);
          d = satv(f + inj);
          x[i] = satv(x[i] + (d >>> dtx));
        end
      xi = longint'(xi_acc >> 12);
      for (int k = 0; k < n_e; k++)
        foreach (e[i]) begin
          longint d1, nbe, pr, s;
          d1 = satv(x2[i] - a);
          nbe = satv(-((e[i] * xi) >>> 16));
          pr = fm(nbe, d1);
          s = e[i] + (pr >>> dte);
          if (s > e_max) s = e_max;
          else if (s < -e_max) s = -e_max;
          e[i] = s;
        end
      dh = h - h_opt;
      z = delta * dh;
      if (z > 64'sd549755813887) z = 64'sd549755813887;
      if (z < -64'sd549755813888) z = -64'sd549755813888;
      th = tanh_pwl(z);
      anew = satv(alpha + ((rho * th) >>> 12));
      xi_acc = xi_acc + gamma;
      if (xi_acc > 64'hFFFF_FFFF) xi_acc = 64'hFFFF_FFFF;
      a = anew;
      if (((nu - nu_c) & 64'hFFFF_FFFF) > tau) begin nu_c = nu; xi_acc = 0; resets++; end
      if (h < h_opt) begin h_opt = h; nu_opt = nu; nu_c = nu; improvements++; end
      nu++;
    endfunction
  endclass
endpackage
