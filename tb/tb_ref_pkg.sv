// tb_ref_pkg: reference models shared by the testbenches.
//
// Floating-point versions of the 16 features (straight from their defining
// formulas, median by sorting), an integer model of the autoencoder with
// the same fixed-point rules as the hardware (Q16.16, truncating shifts,
// saturation, ReLU on hidden layers), the mean squared error, and a
// deterministic test-signal generator: a Hanning-windowed tone burst with a
// given amplitude, delay and frequency plus uniform noise, as 10-bit
// signed samples.
package tb_ref_pkg;

  localparam int NF = 16;
  typedef real    feat_r_t [NF];
  typedef int     fx_arr_t [NF];

  // ---------------- signals ----------------
  function automatic int clip10(input real v);
    int r;
    r = int'(v);
    if (r > 511)  r = 511;
    if (r < -512) r = -512;
    return r;
  endfunction

  // amplitude in LSB, delay and burst length in samples, frequency in
  // cycles per sample, noise amplitude in LSB, seed for $urandom
  function automatic void make_burst(ref int s[], input int n, input real amp,
                                     input int delay, input int len,
                                     input real fcyc, input int noise,
                                     input int unsigned seed);
    real pi = 3.14159265358979;
    int unsigned st;
    st = $urandom(seed);
    s = new[n];
    for (int i = 0; i < n; i++) begin
      real v = 0.0;
      int k = i - delay;
      if (k >= 0 && k < len)
        v = amp * 0.5 * (1.0 - $cos(2.0 * pi * k / len)) * $sin(2.0 * pi * fcyc * k);
      if (noise > 0)
        v = v + real'(int'($urandom() % (2 * noise + 1)) - noise);
      s[i] = clip10(v);
    end
  endfunction

  // ---------------- features ----------------
  function automatic feat_r_t ref_features(const ref int sig[], const ref int base[],
                                           input int n);
    feat_r_t f;
    real x[], xb[], srt[];
    real mu, med, mad, var_, sd, rms, s2, sb2, sd2, sabs, m4, mx, mn, bmx, bmn, amax;
    x = new[n]; xb = new[n]; srt = new[n];
    mu = 0; s2 = 0; sb2 = 0; sd2 = 0; sabs = 0; amax = 0;
    mx = -10; mn = 10; bmx = -10; bmn = 10;
    for (int i = 0; i < n; i++) begin
      x[i]  = sig[i] / 512.0;
      xb[i] = base[i] / 512.0;
      srt[i] = x[i];
      mu   += x[i];
      s2   += x[i] * x[i];
      sb2  += xb[i] * xb[i];
      sd2  += (x[i] - xb[i]) * (x[i] - xb[i]);
      sabs += (x[i] < 0) ? -x[i] : x[i];
      if (((x[i] < 0) ? -x[i] : x[i]) > amax) amax = (x[i] < 0) ? -x[i] : x[i];
      if (x[i] > mx) mx = x[i];
      if (x[i] < mn) mn = x[i];
      if (xb[i] > bmx) bmx = xb[i];
      if (xb[i] < bmn) bmn = xb[i];
    end
    mu = mu / n;
    srt.sort();
    if (n % 2 == 1) med = srt[(n + 1) / 2 - 1];
    else            med = (srt[n / 2 - 1] + srt[n / 2]) / 2.0;
    mad = 0; var_ = 0; m4 = 0;
    for (int i = 0; i < n; i++) begin
      real d = x[i] - mu;
      mad  += (d < 0) ? -d : d;
      var_ += d * d;
      m4   += d * d * d * d;
    end
    mad  = mad / n;
    var_ = var_ / n;
    sd   = $sqrt(var_);
    rms  = $sqrt(s2 / n);
    f[0]  = mu;
    f[1]  = med;
    f[2]  = mad;
    f[3]  = var_;
    f[4]  = sd;
    f[5]  = rms;
    f[6]  = $sqrt(sd2 / sb2);
    f[7]  = (m4 / n) / (var_ * var_);
    f[8]  = 3.0 * (mu - med) / sd;
    f[9]  = amax / rms;
    f[10] = amax / (sabs / n);
    f[11] = rms / (sabs / n);
    f[12] = (mx - mn) - (bmx - bmn);
    f[13] = s2 / sb2;
    f[14] = sd2 / sb2;
    f[15] = (s2 - sb2) / sb2;
    return f;
  endfunction

  function automatic real q16_to_real(input int v);
    return real'(v) / 65536.0;
  endfunction

  // ---------------- autoencoder ----------------
  localparam int NL = 6;
  localparam int L_IN  [NL] = '{16, 16, 32, 64, 64, 32};
  localparam int L_OUT [NL] = '{16, 32, 64, 64, 32, 16};
  localparam int NPAR = 9696;

  function automatic int sat32(input longint v);
    if (v > 64'sd2147483647)  return 2147483647;
    if (v < -64'sd2147483647) return -2147483647;
    return int'(v);
  endfunction

  // params in Keras order: per layer kernel [in][out], then bias [out]
  function automatic fx_arr_t ref_ae(const ref int par[], input fx_arr_t in);
    int a[64], y[64];
    int off;
    fx_arr_t r;
    off = 0;
    for (int i = 0; i < 16; i++) a[i] = in[i];
    for (int l = 0; l < NL; l++) begin
      for (int j = 0; j < L_OUT[l]; j++) begin
        longint acc;
        acc = longint'(par[off + L_IN[l] * L_OUT[l] + j]) <<< 16;
        for (int i = 0; i < L_IN[l]; i++)
          acc += longint'(par[off + i * L_OUT[l] + j]) * longint'(a[i]);
        y[j] = sat32(acc >>> 16);
        if (l != NL - 1 && y[j] < 0) y[j] = 0;
      end
      for (int j = 0; j < L_OUT[l]; j++) a[j] = y[j];
      off += L_IN[l] * L_OUT[l] + L_OUT[l];
    end
    for (int i = 0; i < 16; i++) r[i] = a[i];
    return r;
  endfunction

  // ---------------- reconstruction error ----------------
  function automatic int ref_mse(input fx_arr_t a, input fx_arr_t b);
    real s = 0.0;
    for (int i = 0; i < NF; i++) begin
      real d = real'(a[i]) - real'(b[i]);
      s += d * d;
    end
    // sum of squares in Q32.32 units, /16, back to Q16.16, truncated
    s = s / 16.0 / 65536.0;
    if (s > 2147483647.0) return 2147483647;
    return int'($floor(s));
  endfunction

endpackage
