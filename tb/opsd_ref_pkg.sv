// opsd_ref_pkg: floating-point reference models used by the testbenches.
//
// fft_real performs an in-place radix-2 FFT on arrays of reals (forward,
// unscaled), written independently of the fixed-point RTL. The helpers
// convert between Q1.(W-1) integers and reals.
package opsd_ref_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic void fft_real(ref real re[], ref real im[]);
    int n, j, m, len;
    real tr, ti, wr, wi, ur, ui, vr, vi, ang;
    n = re.size();
    j = 0;
    for (int i = 1; i < n; i++) begin
      m = n >> 1;
      while (j & m) begin
        j = j ^ m;
        m = m >> 1;
      end
      j = j | m;
      if (i < j) begin
        tr = re[i]; re[i] = re[j]; re[j] = tr;
        ti = im[i]; im[i] = im[j]; im[j] = ti;
      end
    end
    len = 2;
    while (len <= n) begin
      for (int i = 0; i < n; i += len) begin
        for (int k = 0; k < len / 2; k++) begin
          ang = -2.0 * PI * k / len;
          wr = $cos(ang);
          wi = $sin(ang);
          ur = re[i+k];
          ui = im[i+k];
          vr = re[i+k+len/2] * wr - im[i+k+len/2] * wi;
          vi = re[i+k+len/2] * wi + im[i+k+len/2] * wr;
          re[i+k] = ur + vr;
          im[i+k] = ui + vi;
          re[i+k+len/2] = ur - vr;
          im[i+k+len/2] = ui - vi;
        end
      end
      len = len * 2;
    end
  endfunction

  // Q1.(w-1) integer held in the low w bits of v -> real
  function automatic real q2r(input longint v, input int w);
    longint s;
    s = (v <<< (64 - w)) >>> (64 - w);
    return real'(s) / real'(64'sd1 <<< (w - 1));
  endfunction

  function automatic longint r2q(input real r, input int w);
    longint v, hi;
    v  = longint'($floor(r * real'(64'sd1 <<< (w - 1)) + 0.5));
    hi = (64'sd1 <<< (w - 1)) - 1;
    if (v > hi) v = hi;
    if (v < -hi - 1) v = -hi - 1;
    return v;
  endfunction

  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

endpackage
