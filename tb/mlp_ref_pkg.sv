// mlp_ref_pkg: reference model of the accelerator's arithmetic for the
// testbenches, written from the number formats rather than from the RTL:
// SPx weights are decoded to real values, dot products are formed in
// floating point (they are exact dyadic values), and the sigmoid is the PLAN
// curve evaluated in floating point.
//   s = sum_j d_j * w_j * 2^EMAX                  (w_j = +/- sum 2^-c_i)
//   z = floor(alpha * s / 2^(EMAX+4)) + b          (Q.8)
//   F = floor(256 * plan(|z|/256)),  y = z<0 ? 256-F : F,  clipped to 255
package mlp_ref_pkg;

  function automatic real spx_value(int code, int terms, int term_bits);
    real v = 0.0;
    for (int i = 0; i < terms; i++) begin
      int k;
      k = (code >> (i * term_bits)) & ((1 << term_bits) - 1);
      if (k != 0) v += 1.0 / real'(1 << k);
    end
    return ((code >> (terms * term_bits)) & 1) ? -v : v;
  endfunction

  function automatic real plan(real x);  // x >= 0
    if (x >= 5.0)   return 1.0;
    if (x >= 2.375) return x / 32.0 + 0.84375;
    if (x >= 1.0)   return x / 8.0 + 0.625;
    return x / 4.0 + 0.5;
  endfunction

  // neuron output from its exact dot product s (already times 2^EMAX)
  function automatic int neuron(real s, int alpha, int bias, int emax);
    longint zq;
    real zr;
    int f, r;
    zq = longint'($floor(s * real'(alpha) / real'(1 << (emax + 4)))) + bias;
    zr = real'(zq) / 256.0;
    f = $rtoi($floor(256.0 * plan(zr < 0 ? -zr : zr)));
    r = (zq < 0) ? 256 - f : f;
    return (r > 255) ? 255 : r;
  endfunction

endpackage
