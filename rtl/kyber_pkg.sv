// kyber_pkg -- constants, types and constant functions shared by the
// KyberMat datapath.
//
// Arithmetic is over Z_q with q = 3329 and polynomials of n = 256
// coefficients, as in Kyber. Every residue is carried as a 12-bit unsigned
// value in [0, q). After the even/odd (polyphase) split each polynomial is a
// length-128 polynomial in y = x^2 modulo y^128 + 1; its 128-point
// negacyclic NTT uses zeta = 17, a primitive 256-th root of unity mod q.
//
// The twiddle factors and the NTT(x^2) constants are not stored as tables:
// they are computed at elaboration time by the constant functions below, so
// the formula is the specification:
//   zeta_k  = 17^brv7(k)            (Kyber's twiddle for butterfly block k)
//   gamma_m = 17^(2*brv7(m)+1)      (NTT(x^2) at NTT-domain position m)
// NTT-domain position m of a polyphase component holds its value at
// gamma_m, the order produced by Kyber's in-place Cooley-Tukey NTT.
package kyber_pkg;

  localparam int unsigned Q     = 3329;
  localparam int unsigned QW    = 12;     // bits per residue
  localparam int unsigned NH    = 128;    // polyphase component length
  localparam int unsigned ZETA  = 17;

  typedef logic [QW-1:0] coeff_t;
  // 128 constants packed into one vector, entry m at [m*12 +: 12]
  typedef logic [NH*QW-1:0] table_t;

  function automatic int unsigned brv7(input int unsigned k);
    int unsigned r;
    r = 0;
    for (int b = 0; b < 7; b++) if (k[b]) r |= (1 << (6 - b));
    return r;
  endfunction

  function automatic int unsigned pow_mod(input int unsigned base, input int unsigned e);
    longint unsigned acc, bb, qq;
    qq  = 64'(Q);
    acc = 1;
    bb  = 64'(base) % qq;
    for (int b = 0; b < 32; b++) begin
      if (e[b]) acc = (acc * bb) % qq;
      bb = (bb * bb) % qq;
    end
    return int'(acc);
  endfunction

  // zeta_k = 17^brv7(k), k = 0..127
  function automatic table_t zeta_table();
    table_t t;
    for (int k = 0; k < NH; k++) t[k*QW +: QW] = coeff_t'(pow_mod(ZETA, brv7(k)));
    return t;
  endfunction

  // gamma_m = 17^(2*brv7(m)+1) = NTT(x^2)[m], m = 0..127
  function automatic table_t gamma_table();
    table_t t;
    for (int m = 0; m < NH; m++) t[m*QW +: QW] = coeff_t'(pow_mod(ZETA, 2 * brv7(m) + 1));
    return t;
  endfunction

  function automatic coeff_t add_q(input coeff_t a, input coeff_t b);
    logic [QW:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= (QW+1)'(Q)) ? coeff_t'(s - (QW+1)'(Q)) : coeff_t'(s);
  endfunction

  function automatic coeff_t sub_q(input coeff_t a, input coeff_t b);
    logic [QW:0] d;
    d = {1'b0, a} - {1'b0, b};
    return (a < b) ? coeff_t'(d + (QW+1)'(Q)) : coeff_t'(d);
  endfunction

  // a/2 mod q: a even -> a>>1, a odd -> (a+q)>>1
  function automatic coeff_t half_q(input coeff_t a);
    logic [QW:0] s;
    s = a[0] ? ({1'b0, a} + (QW+1)'(Q)) : {1'b0, a};
    return coeff_t'(s >> 1);
  endfunction

endpackage
