// tb_admm_ref_pkg: real-valued reference models used by the decoder
// testbenches. They follow the mathematics of the ADMM-LP decoder in double
// precision, independently of the fixed-point pipelines under test:
// projection onto the parity polytope (cut search, cube clip, simplex
// projection by sorting) and the variable-node average.
package tb_admm_ref_pkg;

  // Euclidean projection of v onto the parity polytope PP_d.
  function automatic void pp_project(input real v[], output real z[],
                                     output bit flipped, output bit on_facet);
    int    d = v.size();
    bit    f[];
    int    w_cnt, imin;
    real   u[], w[], mu[], s, facet, tau, t;
    int    rho;
    f = new[d]; u = new[d]; w = new[d]; mu = new[d]; z = new[d];
    w_cnt = 0;
    imin = 0;
    for (int i = 0; i < d; i++) begin
      f[i] = v[i] > 0.5;
      w_cnt += int'(f[i]);
      if ((v[i] - 0.5) * (v[i] - 0.5) < (v[imin] - 0.5) * (v[imin] - 0.5)) imin = i;
    end
    flipped = (w_cnt % 2) == 0;
    if (flipped) f[imin] = !f[imin];
    facet = 0.0;
    w_cnt = 0;
    for (int i = 0; i < d; i++) begin
      u[i] = (v[i] < 0.0) ? 0.0 : (v[i] > 1.0) ? 1.0 : v[i];
      if (f[i]) begin facet += u[i]; w_cnt++; end
      else      facet -= u[i];
    end
    on_facet = facet > real'(w_cnt - 1);
    if (!on_facet) begin
      z = u;
      return;
    end
    for (int i = 0; i < d; i++) w[i] = f[i] ? 1.0 - v[i] : v[i];
    mu = w;
    for (int i = 0; i < d; i++)            // selection sort, descending
      for (int j = i + 1; j < d; j++)
        if (mu[j] > mu[i]) begin t = mu[i]; mu[i] = mu[j]; mu[j] = t; end
    s = 0.0;
    rho = 1;
    tau = mu[0] - 1.0;
    for (int k = 1; k <= d; k++) begin
      s += mu[k-1];
      if (mu[k-1] - (s - 1.0) / k > 0.0) begin
        rho = k;
        tau = (s - 1.0) / k;
      end
    end
    for (int i = 0; i < d; i++) begin
      t = w[i] - tau;
      if (t < 0.0) t = 0.0;
      if (t > 1.0) t = 1.0;
      z[i] = f[i] ? 1.0 - t : t;
    end
  endfunction

  // two's complement field of width w with frac fraction bits, as a real
  function automatic real fx(input longint raw, input int w, input int frac);
    longint s;
    s = raw & ((longint'(1) << w) - 1);
    if (s >= (longint'(1) << (w - 1))) s -= (longint'(1) << w);
    return real'(s) / real'(longint'(1) << frac);
  endfunction

  // quantize to Q3.7 (floor) with 11-bit saturation, as a real
  function automatic real q37(input real a);
    real q;
    q = $floor(a * 128.0);
    if (q > 1023.0)  q = 1023.0;
    if (q < -1024.0) q = -1024.0;
    return q / 128.0;
  endfunction

  function automatic real absr(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

endpackage
