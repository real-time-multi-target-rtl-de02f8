// tb_dsp_pkg: floating-point reference models shared by the testbenches.
//
// fft_ref is a textbook iterative radix-2 transform in double precision,
// unscaled: forward X[k] = sum x[n] exp(-j2pi kn/N), inverse with +j. The
// testbenches divide by N themselves where the hardware scales by 1/N.
package tb_dsp_pkg;

  function automatic void fft_ref(ref real re[], ref real im[], input bit inverse);
    int  n, lg, j;
    real tr, ti, ur, ui, ang, wr, wi;
    n  = re.size();
    lg = $clog2(n);
    for (int i = 0; i < n; i++) begin
      j = 0;
      for (int b = 0; b < lg; b++) if (i[b]) j |= 1 << (lg - 1 - b);
      if (j > i) begin
        tr = re[i]; re[i] = re[j]; re[j] = tr;
        ti = im[i]; im[i] = im[j]; im[j] = ti;
      end
    end
    for (int m = 2; m <= n; m *= 2) begin
      for (int k = 0; k < m / 2; k++) begin
        ang = (inverse ? 2.0 : -2.0) * 3.14159265358979323846 * real'(k) / real'(m);
        wr  = $cos(ang);
        wi  = $sin(ang);
        for (int g = 0; g < n; g += m) begin
          ur = re[g+k]; ui = im[g+k];
          tr = re[g+k+m/2] * wr - im[g+k+m/2] * wi;
          ti = re[g+k+m/2] * wi + im[g+k+m/2] * wr;
          re[g+k]     = ur + tr; im[g+k]     = ui + ti;
          re[g+k+m/2] = ur - tr; im[g+k+m/2] = ui - ti;
        end
      end
    end
  endfunction

  function automatic longint round_r(input real v);
    return (v >= 0.0) ? longint'($rtoi(v + 0.5)) : -longint'($rtoi(-v + 0.5));
  endfunction

  function automatic real abs_r(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
