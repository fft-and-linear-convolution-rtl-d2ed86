// tb_fft_ref_pkg: reference models for the FFT testbenches.
//
//   fixed_fft - the radix-2 DIF FFT written as the textbook in-place loop
//               nest, with the fixed-point rules of the hardware: 16-bit
//               wrapping add/subtract, twiddles W_{2L}^k rounded to 12-bit
//               signed numbers with 10 fraction bits, complex products
//               shifted right by 10 (floor). Returns bins in natural order.
//   float_dft - the direct O(N^2) DFT in double precision.
//   snr_db    - 10*log10(signal power / error power) of a result against
//               the floating-point DFT.
package tb_fft_ref_pkg;
  localparam int MAXN = 64;
  localparam real PI = 3.14159265358979323846;

  typedef int  ivec_t [MAXN];
  typedef real rvec_t [MAXN];

  function automatic int wrap16(longint v);
    return int'(shortint'(v));
  endfunction

  function automatic int qtw(real v);
    real s;
    s = v * 1024.0;
    return $rtoi(s < 0.0 ? s - 0.5 : s + 0.5);
  endfunction

  function automatic int bitrev(int i, int bits);
    int r = 0;
    for (int b = 0; b < bits; b++) if ((i >> b) & 1) r |= 1 << (bits - 1 - b);
    return r;
  endfunction

  function automatic void fixed_fft(input int n, input ivec_t xr, input ivec_t xi,
                                    output ivec_t yr, output ivec_t yi);
    ivec_t ar, ai;
    int bits = $clog2(n);
    ar = xr; ai = xi;
    for (int l = n / 2; l >= 1; l = l / 2) begin
      for (int b = 0; b < n; b += 2 * l) begin
        for (int k = 0; k < l; k++) begin
          int  pr, pi, qr, qi, dr, di, wr, wi;
          real th;
          pr = ar[b+k]; pi = ai[b+k]; qr = ar[b+k+l]; qi = ai[b+k+l];
          th = 2.0 * PI * real'(k) / real'(2 * l);
          wr = qtw($cos(th)); wi = qtw(-$sin(th));
          dr = wrap16(longint'(pr) - qr);
          di = wrap16(longint'(pi) - qi);
          ar[b+k]   = wrap16(longint'(pr) + qr);
          ai[b+k]   = wrap16(longint'(pi) + qi);
          ar[b+k+l] = wrap16((longint'(dr) * wr - longint'(di) * wi) >>> 10);
          ai[b+k+l] = wrap16((longint'(dr) * wi + longint'(di) * wr) >>> 10);
        end
      end
    end
    for (int i = 0; i < n; i++) begin
      yr[bitrev(i, bits)] = ar[i];
      yi[bitrev(i, bits)] = ai[i];
    end
  endfunction

  function automatic void float_dft(input int n, input ivec_t xr, input ivec_t xi,
                                    output rvec_t yr, output rvec_t yi);
    for (int k = 0; k < n; k++) begin
      yr[k] = 0.0; yi[k] = 0.0;
      for (int t = 0; t < n; t++) begin
        real th = -2.0 * PI * real'((k * t) % n) / real'(n);
        yr[k] += xr[t] * $cos(th) - xi[t] * $sin(th);
        yi[k] += xr[t] * $sin(th) + xi[t] * $cos(th);
      end
    end
  endfunction

  function automatic real snr_db(input int n, input ivec_t hr, input ivec_t hi,
                                 input rvec_t fr, input rvec_t fi);
    real ps = 0.0, pe = 0.0;
    for (int k = 0; k < n; k++) begin
      ps += fr[k] * fr[k] + fi[k] * fi[k];
      pe += (hr[k] - fr[k]) ** 2 + (hi[k] - fi[k]) ** 2;
    end
    if (pe == 0.0) return 200.0;
    return 10.0 * $log10(ps / pe);
  endfunction
endpackage
