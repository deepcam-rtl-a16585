// tb_ref_pkg: reference arithmetic for the DeepCAM testbenches, written
// independently of the RTL: real-valued cosine approximation and dot
// product, minifloat decoding, population count.
package tb_ref_pkg;
  localparam real PI = 3.14159265358979323846;

  function automatic int popcount(input logic [1023:0] v, input int nbits);
    int n = 0;
    for (int i = 0; i < nbits; i++) n += int'(v[i]);
    return n;
  endfunction

  // Eq. 5 of the design description, in real arithmetic
  function automatic real cos_ref(input int hd, input int k);
    real th;
    if (2*hd > k) return -cos_ref(k - hd, k);
    th = PI * real'(hd) / real'(k);
    if (3*hd <= k) return 1.0 - th / PI;
    return -0.96 * th + 1.51;
  endfunction

  // minifloat: 4-bit exponent (bias 7), 4-bit mantissa, exp 0 subnormal
  function automatic real mf_real(input logic [7:0] n);
    int e = int'(n[7:4]);
    int m = int'(n[3:0]);
    if (e == 0) return real'(m) / 16.0 * (2.0 ** -6);
    return (1.0 + real'(m) / 16.0) * (2.0 ** (e - 7));
  endfunction

  function automatic real dot_ref(input int hd, input int k, input logic [7:0] na,
                                  input logic [7:0] nb);
    return mf_real(na) * mf_real(nb) * cos_ref(hd, k);
  endfunction

  function automatic real absr(input real a);
    return (a < 0.0) ? -a : a;
  endfunction
endpackage
