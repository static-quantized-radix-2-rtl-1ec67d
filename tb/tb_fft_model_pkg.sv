// tb_fft_model_pkg: reference models used by the testbenches.
//
// Written from the arithmetic definitions, not from the RTL:
//  * ref_quant: the uniform and mantissa quantizers evaluated in real
//    arithmetic (Q(x) = q*floor(x/q + 1/2), and 2^e * Q(M) for the mantissa
//    form), magnitude clamped to 1.0.
//  * ref_fft_fixed: a radix-2 decimation-in-time FFT over integer arrays
//    with the same number formats as the processor (input scaling, twiddle
//    rounding, product rounding), so the pipeline can be checked bit-exactly.
//  * ref_dft: a direct O(N^2) DFT/IDFT in double precision, the ideal
//    result that the processor's output stage compares against.
package tb_fft_model_pkg;
  import fft_pkg::*;

  typedef longint cvec_t [];

  function automatic real p2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic int ref_quant(int x, int b, bit fl, bit en);
    real m, step, r;
    int  e;
    if (!en || x == 0) return x;
    m = (x < 0) ? -real'(x) : real'(x);
    if (!fl) begin
      step = p2(int'(TW_FRAC) - b);
    end else begin
      e = 0;
      while (p2(e) <= m) e++;
      step = p2(e - b);
    end
    if (step <= 1.0) return x;
    r = $floor(m / step + 0.5) * step;
    if (r > p2(TW_FRAC)) r = p2(TW_FRAC);
    return (x < 0) ? -int'(r) : int'(r);
  endfunction

  function automatic int bitrev(int a, int l);
    int r = 0;
    for (int i = 0; i < l; i++) if (a[i]) r |= 1 << (l - 1 - i);
    return r;
  endfunction

  function automatic longint rnd_mul(longint a, int w);
    longint p = a * longint'(w);
    return (p + (64'sd1 <<< (TW_FRAC - 1))) >>> TW_FRAC;
  endfunction

  // Bit-exact model of the pipeline. x_re/x_im are the IN_W-bit inputs in
  // natural order; results in natural order in y_re/y_im.
  function automatic void ref_fft_fixed(input int l, input bit ifft, input bit qen,
                                        input int qb [], input bit fl,
                                        input int x_re [], input int x_im [],
                                        output cvec_t y_re, output cvec_t y_im);
    int n = 1 << l;
    longint a_re [], a_im [];
    a_re = new[n];
    a_im = new[n];
    for (int i = 0; i < n; i++) begin
      a_re[i] = ifft ? longint'(x_re[bitrev(i, l)]) : longint'(x_re[bitrev(i, l)]) <<< l;
      a_im[i] = ifft ? longint'(x_im[bitrev(i, l)]) : longint'(x_im[bitrev(i, l)]) <<< l;
    end
    for (int s = 0; s < l; s++) begin
      int d = 1 << s;
      for (int blk = 0; blk < n; blk += 2 * d) begin
        for (int j = 0; j < d; j++) begin
          int wr, wi;
          longint tr, ti, ur, ui, vr, vi;
          wr = ref_quant(int'(tw_cos(j, 2 * d)), qb[s], fl, qen);
          wi = ref_quant(int'(tw_sin(j, 2 * d)), qb[s], fl, qen);
          if (ifft) wi = -wi;
          ur = a_re[blk + j];      ui = a_im[blk + j];
          vr = a_re[blk + j + d];  vi = a_im[blk + j + d];
          tr = (vr * wr - vi * wi + (64'sd1 <<< (TW_FRAC - 1))) >>> TW_FRAC;
          ti = (vr * wi + vi * wr + (64'sd1 <<< (TW_FRAC - 1))) >>> TW_FRAC;
          a_re[blk + j]     = ur + tr;  a_im[blk + j]     = ui + ti;
          a_re[blk + j + d] = ur - tr;  a_im[blk + j + d] = ui - ti;
        end
      end
    end
    y_re = a_re;
    y_im = a_im;
  endfunction

  // Ideal transform in double precision, returned in the processor's output
  // format (LSB 2^-(IN_W-1+l)), rounded to nearest.
  function automatic void ref_dft(input int l, input bit ifft,
                                  input int x_re [], input int x_im [],
                                  output cvec_t y_re, output cvec_t y_im);
    int n = 1 << l;
    real sr, si, ang, scale;
    y_re = new[n];
    y_im = new[n];
    scale = ifft ? 1.0 : real'(n);   // IFFT: (1/N) * sum, in units of 2^-(IN_W-1+l)
    for (int k = 0; k < n; k++) begin
      sr = 0.0;
      si = 0.0;
      for (int i = 0; i < n; i++) begin
        ang = (ifft ? 2.0 : -2.0) * PI * real'((i * k) % n) / real'(n);
        sr += real'(x_re[i]) * $cos(ang) - real'(x_im[i]) * $sin(ang);
        si += real'(x_re[i]) * $sin(ang) + real'(x_im[i]) * $cos(ang);
      end
      y_re[k] = longint'($floor(sr * scale + 0.5));
      y_im[k] = longint'($floor(si * scale + 0.5));
    end
  endfunction

endpackage
