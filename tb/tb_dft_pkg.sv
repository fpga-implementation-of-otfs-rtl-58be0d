// tb_dft_pkg: floating-point reference transforms for the testbenches.
//
// dft() is the plain N-point discrete Fourier transform
//   Y[k] = (1/sqrt(N)) * sum_n X[n] * exp(s * j*2*pi*n*k/N),
// with s = -1 (FFT) or +1 (IFFT), computed directly from the definition in
// double precision, so it shares nothing with the fixed-point radix-2 cores
// it is used to check. Vectors are real/imaginary pairs of real arrays.
// blocks() applies dft() to every consecutive block of `len` samples of a
// frame; transpose() reorders a column-major rows x cols frame into the
// column-major frame of its transpose; sfft2d() is the symplectic engine's
// reference: blocks(IFFT), transpose, blocks(FFT).
package tb_dft_pkg;

  typedef real rvec_t [];

  function automatic void dft(input real xr[], input real xi[], input bit inverse,
                              output real yr[], output real yi[]);
    int   n;
    real  s;
    real  ang;
    real  pi;
    pi = 3.14159265358979323846;
    n  = xr.size();
    s  = inverse ? 1.0 : -1.0;
    yr = new[n];
    yi = new[n];
    for (int k = 0; k < n; k++) begin
      yr[k] = 0.0;
      yi[k] = 0.0;
      for (int t = 0; t < n; t++) begin
        ang = s * 2.0 * pi * real'((t * k) % n) / real'(n);
        yr[k] += xr[t] * $cos(ang) - xi[t] * $sin(ang);
        yi[k] += xr[t] * $sin(ang) + xi[t] * $cos(ang);
      end
      yr[k] = yr[k] / $sqrt(real'(n));
      yi[k] = yi[k] / $sqrt(real'(n));
    end
  endfunction

  function automatic void blocks(input real xr[], input real xi[], input int len,
                                 input bit inverse, output real yr[], output real yi[]);
    real br[], bi[], or_[], oi[];
    yr = new[xr.size()];
    yi = new[xr.size()];
    br = new[len];
    bi = new[len];
    for (int b = 0; b < xr.size() / len; b++) begin
      for (int t = 0; t < len; t++) begin
        br[t] = xr[b * len + t];
        bi[t] = xi[b * len + t];
      end
      dft(br, bi, inverse, or_, oi);
      for (int t = 0; t < len; t++) begin
        yr[b * len + t] = or_[t];
        yi[b * len + t] = oi[t];
      end
    end
  endfunction

  // in: cols columns of `rows` samples; out: rows columns of `cols` samples.
  function automatic void transpose(input real xr[], input real xi[], input int rows,
                                    input int cols, output real yr[], output real yi[]);
    yr = new[xr.size()];
    yi = new[xr.size()];
    for (int j = 0; j < rows; j++)
      for (int e = 0; e < cols; e++) begin
        yr[j * cols + e] = xr[e * rows + j];
        yi[j * cols + e] = xi[e * rows + j];
      end
  endfunction

  function automatic void sfft2d(input real xr[], input real xi[], input int rows,
                                 input int cols, output real yr[], output real yi[]);
    real ar[], ai[], br[], bi[];
    blocks(xr, xi, rows, 1'b1, ar, ai);
    transpose(ar, ai, rows, cols, br, bi);
    blocks(br, bi, cols, 1'b0, yr, yi);
  endfunction

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
