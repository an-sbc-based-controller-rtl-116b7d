// tb_dsp_pkg: floating-point signal-processing helpers for the testbenches:
// an in-place radix-2 decimation-in-time FFT, a direct DFT to cross-check
// it, and the exact (unquantised) 4-term Nuttall window.
package tb_dsp_pkg;

  localparam real PI = 3.14159265358979323846;

  // In-place forward FFT, X[k] = sum x[n] exp(-j 2 pi n k / L); L a power of 2.
  function automatic void fft(ref real re[], ref real im[]);
    int l = re.size();
    int j = 0;
    for (int i = 1; i < l; i++) begin
      int bit_ = l >> 1;
      while ((j & bit_) != 0) begin j ^= bit_; bit_ >>= 1; end
      j |= bit_;
      if (i < j) begin
        real t;
        t = re[i]; re[i] = re[j]; re[j] = t;
        t = im[i]; im[i] = im[j]; im[j] = t;
      end
    end
    for (int len = 2; len <= l; len <<= 1) begin
      real ang = -2.0 * PI / len;
      for (int i = 0; i < l; i += len)
        for (int k = 0; k < len / 2; k++) begin
          real wr = $cos(ang * k), wi = $sin(ang * k);
          int a = i + k, b = i + k + len / 2;
          real tr = re[b] * wr - im[b] * wi;
          real ti = re[b] * wi + im[b] * wr;
          re[b] = re[a] - tr; im[b] = im[a] - ti;
          re[a] = re[a] + tr; im[a] = im[a] + ti;
        end
    end
  endfunction

  function automatic void dft(input real x[], output real re[], output real im[]);
    int l = x.size();
    re = new[l]; im = new[l];
    for (int k = 0; k < l; k++) begin
      re[k] = 0.0; im[k] = 0.0;
      for (int n = 0; n < l; n++) begin
        re[k] += x[n] * $cos(-2.0 * PI * n * k / l);
        im[k] += x[n] * $sin(-2.0 * PI * n * k / l);
      end
    end
  endfunction

  function automatic real nuttall(int n, int l);
    real a = 2.0 * PI * n / l;
    return 0.3635819 - 0.4891775 * $cos(a) + 0.1365995 * $cos(2.0 * a) - 0.0106411 * $cos(3.0 * a);
  endfunction

endpackage
