// fft_ref_pkg -- reference models used by the testbenches.
//
// fixed_fft() is a textbook iterative radix-2 decimation-in-time FFT written
// with plain integer arithmetic and its own twiddle computation: bit-reverse
// the input, then for every stage with half-span h, groups of 2h and
// t = 0..h-1, pair positions g+t and g+t+h with twiddle W_N^(t*N/(2h)). It
// reproduces the processor's number format bit for bit: twiddles rounded to
// 18-bit Q2.16, each twiddle product rounded half up to an integer, sums and
// differences wrapped at 18 bits. dft_re/dft_im give the exact DFT in real
// arithmetic, used to check that the fixed-point results are a transform at
// all.
package fft_ref_pkg;

  localparam int  W    = 18;
  localparam int  FRAC = 16;
  localparam real PI   = 3.14159265358979323846;

  typedef longint cvec_t [];

  function automatic longint wrap(input longint v);
    longint m;
    m = v & ((64'sd1 <<< W) - 1);
    if (m >= (64'sd1 <<< (W - 1))) m = m - (64'sd1 <<< W);
    return m;
  endfunction

  function automatic longint tw_re(input int k, input int n);
    return longint'($rtoi($floor($cos(2.0 * PI * k / n) * (1 << FRAC) + 0.5)));
  endfunction

  function automatic longint tw_im(input int k, input int n);
    return longint'($rtoi($floor(-$sin(2.0 * PI * k / n) * (1 << FRAC) + 0.5)));
  endfunction

  function automatic int rev(input int v, input int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // In/out: xr/xi natural order; result written to yr/yi natural order.
  function automatic void fixed_fft(input int n, input longint xr[], input longint xi[],
                                    ref longint yr[], ref longint yi[]);
    int     bits = $clog2(n);
    longint ar[], ai[];
    ar = new[n]; ai = new[n];
    for (int i = 0; i < n; i++) begin
      ar[rev(i, bits)] = xr[i];
      ai[rev(i, bits)] = xi[i];
    end
    for (int h = 1; h < n; h *= 2) begin
      for (int g = 0; g < n; g += 2 * h) begin
        for (int t = 0; t < h; t++) begin
          int     k  = t * (n / (2 * h));
          longint wr = tw_re(k, n), wi = tw_im(k, n);
          longint br = ar[g+t+h], bi = ai[g+t+h];
          longint pr = (br * wr - bi * wi + (64'sd1 <<< (FRAC - 1))) >>> FRAC;
          longint pi_ = (br * wi + bi * wr + (64'sd1 <<< (FRAC - 1))) >>> FRAC;
          longint ur = ar[g+t], ui = ai[g+t];
          pr  = wrap(pr);
          pi_ = wrap(pi_);
          ar[g+t]   = wrap(ur + pr);
          ai[g+t]   = wrap(ui + pi_);
          ar[g+t+h] = wrap(ur - pr);
          ai[g+t+h] = wrap(ui - pi_);
        end
      end
    end
    yr = ar; yi = ai;
  endfunction

  function automatic real dft_re(input int n, input longint xr[], input longint xi[], input int k);
    real s = 0.0;
    for (int i = 0; i < n; i++)
      s += xr[i] * $cos(2.0 * PI * i * k / n) + xi[i] * $sin(2.0 * PI * i * k / n);
    return s;
  endfunction

  function automatic real dft_im(input int n, input longint xr[], input longint xi[], input int k);
    real s = 0.0;
    for (int i = 0; i < n; i++)
      s += xi[i] * $cos(2.0 * PI * i * k / n) - xr[i] * $sin(2.0 * PI * i * k / n);
    return s;
  endfunction

endpackage
