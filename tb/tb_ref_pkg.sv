// tb_ref_pkg: floating-point reference models used by the testbenches.
//
// These model what the hardware is meant to compute, in 'real' arithmetic and written
// independently of the RTL: a radix-2 16-point FFT whose twiddle factors are either
// the Q1.14 values of cos/sin (mode 1) or the two-term power-of-two approximation
// (mode 2, the value the register bank is specified to hold), the IFFT as
// re(FFT(conj X))/16, weight-code decoding for both modes, BN with leaky ReLU, and
// saturation. Comparisons with the RTL use small tolerances for rounding.
package tb_ref_pkg;

  localparam int N = 16;
  localparam real PI = 3.14159265358979323846;

  // Two-term power-of-two approximation of v (|v| <= 1): nearest s1*2^-a + s2*2^-b,
  // a, b in 0..14, second term optional. Brute force.
  function automatic real pow2_approx(real v);
    real best, c;
    best = 0.0;
    for (int a = 0; a <= 14; a++)
      for (int sa = -1; sa <= 1; sa += 2)
        for (int b = -1; b <= 14; b++)
          for (int sb = -1; sb <= 1; sb += 2) begin
            c = sa * (2.0 ** (-a)) + ((b >= 0) ? sb * (2.0 ** (-b)) : 0.0);
            if ((c - v) * (c - v) < (best - v) * (best - v) - 1e-12) best = c;
          end
    return best;
  endfunction

  function automatic real q14(real v);
    return $floor(v * 16384.0 + 0.5) / 16384.0;
  endfunction

  // twiddle W^k = c - j s
  function automatic void twiddle(int k, bit approx, output real c, output real s);
    c = $cos(2.0 * PI * k / N);
    s = $sin(2.0 * PI * k / N);
    c = q14(c);
    s = q14(s);
    if (approx) begin
      c = pow2_approx(c);
      s = pow2_approx(s);
    end
  endfunction

  function automatic int brev(int i);
    return ((i & 1) << 3) | ((i & 2) << 1) | ((i & 4) >> 1) | ((i & 8) >> 3);
  endfunction

  // In-place radix-2 DIT FFT in reals. approx selects the mode-2 twiddles; the trivial
  // twiddles W^0 and W^4 stay exact, as in the hardware.
  function automatic void fft(input real xr[N], input real xi[N], input bit approx,
                              output real yr[N], output real yi[N]);
    real ar[N], ai[N], c, s, tr, ti;
    int  half, m, k;
    for (int i = 0; i < N; i++) begin ar[i] = xr[brev(i)]; ai[i] = xi[brev(i)]; end
    for (int st = 0; st < 4; st++) begin
      half = 1 << st;
      m = half * 2;
      for (int g = 0; g < N; g += m)
        for (int j = 0; j < half; j++) begin
          k = j * (N / m);
          if (k == 0)      begin c = 1.0; s = 0.0; end
          else if (k == 4) begin c = 0.0; s = 1.0; end
          else twiddle(k, approx, c, s);
          tr = ar[g+j+half] * c + ai[g+j+half] * s;
          ti = ai[g+j+half] * c - ar[g+j+half] * s;
          ar[g+j+half] = ar[g+j] - tr;
          ai[g+j+half] = ai[g+j] - ti;
          ar[g+j] = ar[g+j] + tr;
          ai[g+j] = ai[g+j] + ti;
        end
    end
    yr = ar;
    yi = ai;
  endfunction

  // real part of IFFT = re(FFT(conj X)) / N
  function automatic void ifft_re(input real xr[N], input real xi[N], input bit approx,
                                  output real y[N]);
    real ci[N], fr[N], fi[N];
    for (int i = 0; i < N; i++) ci[i] = -xi[i];
    fft(xr, ci, approx, fr, fi);
    for (int i = 0; i < N; i++) y[i] = fr[i] / N;
  endfunction

  // value of a 6-bit weight code
  function automatic int wcode(int code, bit mode2);
    int p, s, v;
    if (!mode2) return (code >= 32) ? code - 64 : code;
    p = (code >> 2) & 7;
    s = code & 3;
    v = (p != 0 ? (1 << (p - 1)) : 0) + (s != 0 ? (1 << (s - 1)) : 0);
    return ((code >> 5) & 1) ? -v : v;
  endfunction

  function automatic real sat16(real v);
    if (v > 32767.0) return 32767.0;
    if (v < -32768.0) return -32768.0;
    return v;
  endfunction

  // BN (scale, bias, shift 8) then leaky ReLU with slope 205/2048
  function automatic real bn_ref(real y, int scale, int bias);
    real v;
    v = sat16($floor(y * scale / 256.0) + bias);
    if (v < 0) v = $floor(v * 205.0 / 2048.0);
    return v;
  endfunction

  function automatic bit close(real dut, real ref_v, real tol);
    real d;
    d = dut - ref_v;
    if (d < 0) d = -d;
    return d <= tol;
  endfunction

endpackage
