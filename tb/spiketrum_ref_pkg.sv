// spiketrum_ref_pkg: bit-exact reference model of the spiketrum encoder, for
// the testbenches. It follows the algorithm, not the RTL: plain loops over
// shifts and kernels, with the same fixed-point rules (Q1.15 samples and taps,
// s = H >>> 15 saturated to 24 bits, s*phi rounded half up, residual
// saturated to 16 bits, search by |H| with ties to the earlier shift and then
// the lower kernel).
package spiketrum_ref_pkg;

  typedef int     int_da_t [];
  typedef longint lint_da_t [];

  function automatic longint sat(input longint v, input int bits);
    longint mx = (64'sd1 <<< (bits - 1)) - 1;
    longint mn = -mx - 1;
    if (v > mx) return mx;
    if (v < mn) return mn;
    return v;
  endfunction

  // One matching-pursuit step on residual r (SEG samples) with kernels ker
  // (NK*L taps, kernel m at m*L). Returns the code; updates r when s != 0.
  function automatic void mp_step(ref int r [], ref int ker [], input int NK, input int L,
                                  input int SEG, output int m_o, output int p_o, output int s_o);
    longint best_abs = -1;
    longint best_val = 0;
    int     best_m = 0, best_p = 0;
    for (int p = 0; p < SEG + L - 1; p++) begin
      int tlo = (p >= L - 1) ? p - (L - 1) : 0;
      int thi = (p < SEG) ? p : SEG - 1;
      for (int m = 0; m < NK; m++) begin
        longint acc = 0;
        longint a;
        for (int t = tlo; t <= thi; t++)
          acc += longint'(r[t]) * longint'(ker[m * L + t + L - 1 - p]);
        a = (acc < 0) ? -acc : acc;
        if (a > best_abs) begin
          best_abs = a; best_val = acc; best_m = m; best_p = p;
        end
      end
    end
    m_o = best_m;
    p_o = best_p;
    s_o = int'(sat(best_val >>> 15, 24));
    if (s_o != 0) begin
      int tlo = (best_p >= L - 1) ? best_p - (L - 1) : 0;
      int thi = (best_p < SEG) ? best_p : SEG - 1;
      for (int t = tlo; t <= thi; t++) begin
        longint prod = (longint'(s_o) * longint'(ker[best_m * L + t + L - 1 - best_p]) + 16384) >>> 15;
        r[t] = int'(sat(longint'(r[t]) - prod, 16));
      end
    end
  endfunction

  function automatic longint energy(ref int r []);
    longint e = 0;
    foreach (r[i]) e += longint'(r[i]) * longint'(r[i]);
    return e;
  endfunction

  // Intensity-to-place channel of a code, given the centre table.
  function automatic int itp_channel(input int m, input int s, ref int center [], input int K);
    int mag = (s < 0) ? -s : s;
    int best_k = 0;
    int best_d = 0;
    for (int k = 0; k < K; k++) begin
      int c = center[m * K + k];
      int d = (c > mag) ? c - mag : mag - c;
      if (k == 0 || d < best_d) begin best_d = d; best_k = k; end
    end
    return m * K + best_k;
  endfunction

  // Reset value of centre k: 2^15 >> (3*(K-1-k)).
  function automatic int default_center(input int k, input int K);
    return 32768 >> (3 * (K - 1 - k));
  endfunction

  // A Gammatone-like test kernel: t^3 exp(-2 pi b t) cos(2 pi f t), scaled to
  // peak 'amp' (Q1.15), with f spread over the kernels.
  function automatic int gammatone_tap(input int m, input int NK, input int j, input int L,
                                       input int amp);
    real fs = 16000.0;
    real f  = 100.0 * (2.0 ** (6.0 * real'(m) / real'((NK > 1) ? NK - 1 : 1)));
    real b  = 24.7 + 0.108 * f;
    real tt = real'(j) / fs;
    real tp = 3.0 / (2.0 * 3.14159265358979 * b);   // peak of t^3 exp(-2 pi b t)
    real env = (tt ** 3) * $exp(-2.0 * 3.14159265358979 * b * tt) /
               ((tp ** 3) * $exp(-3.0));
    real v = real'(amp) * env * $cos(2.0 * 3.14159265358979 * f * tt);
    if (L < 1) return 0;
    return int'($rtoi(v));
  endfunction

endpackage
