// pat_ref_pkg: reference model and test data for the reconstruction core.
//
// Geometry of the test setup: a ring of n_sens elements of radius 30 mm
// around a 20 mm x 20 mm region of img_n x img_n pixels, element 0 on the
// left end of the horizontal axis, numbered clockwise. Distances are
// turned into samples with a rate chosen so that the farthest pixel maps
// just inside the m-sample record (this rate is a test choice; the
// core only sees integer tables). Tables:
//   delay(s, j)  = round(d * spm)                           (DAS)
//   offset(s, j) = round((d - R) * spm) mod m                (s-Wave phase)
//   amp(s, j)    = min(255, round(255 * (d_min / d)^2))      (s-Wave A ~ 1/d^2)
//   std[k]       = round(8000 * u * exp(-u^2)), u = (k - k0)/2, k0 = round(R*spm)
// The reference functions compute every sensor directly from its own
// position, without the symmetry reuse the hardware relies on, and
// reproduce the fixed-point arithmetic of the core bit for bit.
package pat_ref_pkg;

  localparam real PI     = 3.14159265358979323846;
  localparam real RADIUS = 30.0;
  localparam real ROI    = 20.0;

  function automatic real spm(int m);
    return real'(m - 1) / (RADIUS + ROI / 2.0 * $sqrt(2.0) + 0.5);
  endfunction

  function automatic real distance(int s, int j, int n_sens, int img_n);
    real th, sx, sy, px, py, pitch;
    int row, col;
    th    = PI - real'(s) * 2.0 * PI / real'(n_sens);
    sx    = RADIUS * $cos(th);
    sy    = RADIUS * $sin(th);
    pitch = ROI / real'(img_n);
    row   = j / img_n;
    col   = j % img_n;
    px    = (real'(col) - real'(img_n - 1) / 2.0) * pitch;
    py    = (real'(img_n - 1) / 2.0 - real'(row)) * pitch;
    return $sqrt((px - sx) ** 2 + (py - sy) ** 2);
  endfunction

  function automatic int delay_of(int s, int j, int n_sens, int img_n, int m);
    int d;
    d = int'(distance(s, j, n_sens, img_n) * spm(m));
    if (d > m - 1) d = m - 1;
    return d;
  endfunction

  function automatic int offset_of(int s, int j, int n_sens, int img_n, int m);
    int o;
    o = int'((distance(s, j, n_sens, img_n) - RADIUS) * spm(m));
    return ((o % m) + m) % m;
  endfunction

  function automatic int amp_of(int s, int j, int n_sens, int img_n);
    real dmin, d;
    int a;
    dmin = RADIUS - ROI / 2.0 * $sqrt(2.0);
    d    = distance(s, j, n_sens, img_n);
    a    = int'(255.0 * (dmin / d) ** 2);
    return (a > 255) ? 255 : a;
  endfunction

  function automatic int std_of(int k, int m);
    real u;
    int k0;
    k0 = int'(RADIUS * spm(m));
    u  = real'(k - k0) / 2.0;
    return int'(8000.0 * u * $exp(-u * u));
  endfunction

  function automatic int sat16(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // |DAS| image: img[j] = | sum_s S[s*m + delay(s,j)] |
  function automatic void ref_das(ref int s_data[], input int n_sens, img_n, m,
                                  ref longint img[]);
    img = new[img_n * img_n];
    for (int j = 0; j < img_n * img_n; j++) begin
      longint acc = 0;
      for (int s = 0; s < n_sens; s++)
        acc += s_data[s * m + delay_of(s, j, n_sens, img_n, m)];
      img[j] = (acc < 0) ? -acc : acc;
    end
  endfunction

  // (v << 8) / max over the image, optionally saturated to 8 bits
  function automatic void ref_norm(ref longint img[], input bit sat8, ref int o[]);
    longint mx = 0;
    o = new[img.size()];
    foreach (img[j]) if (img[j] > mx) mx = img[j];
    foreach (img[j]) begin
      o[j] = (mx == 0) ? 0 : int'((img[j] <<< 8) / mx);
      if (sat8 && o[j] > 255) o[j] = 255;
    end
  endfunction

  // deviation: t = 0 keeps x, else | prev - (x*lr >> 8) |
  function automatic void ref_dev(ref longint prev[], ref int x[], input bit t_zero,
                                  input int lr);
    foreach (prev[j]) begin
      longint sc = (longint'(x[j]) * lr) >>> 8;
      if (t_zero) prev[j] = x[j];
      else        prev[j] = (prev[j] >= sc) ? prev[j] - sc : sc - prev[j];
    end
  endfunction

  // s-Wave: sn[s*m + (tau+k) mod m] += (p*A*std[k]) >>> shift, 32-bit wrap
  function automatic void ref_swave(ref int pix[], input int n_sens, img_n, m,
                                    sig_len, shift, ref int sn[]);
    int stdv[];
    stdv = new[sig_len];
    for (int k = 0; k < sig_len; k++) stdv[k] = std_of(k, m);
    sn = new[n_sens * m];
    foreach (sn[i]) sn[i] = 0;
    for (int s = 0; s < n_sens; s++)
      for (int j = 0; j < img_n * img_n; j++) begin
        int tau = offset_of(s, j, n_sens, img_n, m);
        longint w = longint'(pix[j]) * amp_of(s, j, n_sens, img_n);
        if (w == 0) continue;
        for (int k = 0; k < sig_len; k++) begin
          int a = (tau + k) % m;
          sn[s * m + a] += int'((w * stdv[k]) >>> shift);
        end
      end
  endfunction

  // residual r = sat16(sn - S), returns sum of squares
  function automatic longint ref_resid(ref int sn[], ref int s_data[], ref int r[]);
    longint sq = 0;
    r = new[sn.size()];
    foreach (sn[i]) begin
      r[i] = sat16(longint'(sn[i]) - s_data[i]);
      sq += longint'(r[i]) * r[i];
    end
    return sq;
  endfunction

  function automatic longint isqrt_ref(longint x);
    longint r = longint'($floor($sqrt(real'(x))));
    while (r * r > x) r--;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

endpackage
