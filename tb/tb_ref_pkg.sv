// tb_ref_pkg -- reference arithmetic for the testbenches, written
// independently of the RTL datapath: transforms are evaluated directly from
// their definitions (O(n^2) sums), products by schoolbook multiplication.
//   ntt128(x)[m]  = sum_t x[t] * g_m^t,        g_m = 17^(2*brv7(m)+1)
//   intt128(X)[t] = 128^-1 * sum_m X[m] * g_m^-t
//   negacyclic 256-point product: c = a*b mod (x^256 + 1)
package tb_ref_pkg;
  localparam int Q = 3329;

  typedef int poly128_t [128];
  typedef int poly256_t [256];

  function automatic int mulq(input int a, input int b);
    return int'((longint'(a) * longint'(b)) % Q);
  endfunction

  function automatic int powq(input int b, input int e);
    int r;
    r = 1;
    for (int i = 0; i < e; i++) r = mulq(r, b);
    return r;
  endfunction

  function automatic int brv7(input int k);
    int r;
    r = 0;
    for (int b = 0; b < 7; b++) if ((k >> b) & 1) r |= 1 << (6 - b);
    return r;
  endfunction

  // evaluation point of NTT-domain position m
  function automatic int gpt(input int m);
    return powq(17, 2 * brv7(m) + 1);
  endfunction

  function automatic poly128_t ntt128(input poly128_t x);
    poly128_t y;
    for (int m = 0; m < 128; m++) begin
      int g, acc, pw;
      g = gpt(m); acc = 0; pw = 1;
      for (int t = 0; t < 128; t++) begin
        acc = (acc + mulq(x[t], pw)) % Q;
        pw  = mulq(pw, g);
      end
      y[m] = acc;
    end
    return y;
  endfunction

  function automatic poly128_t intt128(input poly128_t x);
    poly128_t y;
    int inv128;
    inv128 = powq(128, Q - 2);
    for (int t = 0; t < 128; t++) y[t] = 0;
    for (int m = 0; m < 128; m++) begin
      int gi, pw;
      gi = powq(gpt(m), Q - 2); pw = 1;
      for (int t = 0; t < 128; t++) begin
        y[t] = (y[t] + mulq(x[m], pw)) % Q;
        pw   = mulq(pw, gi);
      end
    end
    for (int t = 0; t < 128; t++) y[t] = mulq(y[t], inv128);
    return y;
  endfunction

  function automatic poly256_t negamul(input poly256_t a, input poly256_t b);
    poly256_t c;
    for (int i = 0; i < 256; i++) c[i] = 0;
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        int p;
        p = mulq(a[i], b[j]);
        if (i + j < 256) c[i+j] = (c[i+j] + p) % Q;
        else             c[i+j-256] = (c[i+j-256] + Q - p) % Q;
      end
    return c;
  endfunction
endpackage
