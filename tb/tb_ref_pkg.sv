// tb_ref_pkg: double-precision reference transforms for the testbenches.
// fft_inplace is a textbook iterative radix-2 FFT (bit-reversal permutation,
// then log2(n) butterfly stages) on separate real and imaginary arrays; sign
// -1 gives the forward transform, +1 the inverse, both unscaled.
package tb_ref_pkg;
  localparam real PI = 3.14159265358979323846;

  function automatic void fft_inplace(ref real re[], ref real im[], input int n, input real sgn);
    int j = 0;
    for (int i = 0; i < n - 1; i++) begin
      int m;
      if (i < j) begin
        real t;
        t = re[i]; re[i] = re[j]; re[j] = t;
        t = im[i]; im[i] = im[j]; im[j] = t;
      end
      m = n >> 1;
      while (m >= 1 && (j & m) != 0) begin j ^= m; m >>= 1; end
      j |= m;
    end
    for (int len = 2; len <= n; len <<= 1) begin
      for (int k = 0; k < len / 2; k++) begin
        real wr = $cos(sgn * 2.0 * PI * real'(k) / real'(len));
        real wi = $sin(sgn * 2.0 * PI * real'(k) / real'(len));
        for (int s = 0; s < n; s += len) begin
          int a = s + k, b = s + k + len / 2;
          real tr = re[b] * wr - im[b] * wi;
          real ti = re[b] * wi + im[b] * wr;
          re[b] = re[a] - tr; im[b] = im[a] - ti;
          re[a] = re[a] + tr; im[a] = im[a] + ti;
        end
      end
    end
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
endpackage
