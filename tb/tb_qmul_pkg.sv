// tb_qmul_pkg -- reference models for the quaternion multiplying unit testbenches.
//
// The references do not reuse any factorisation of the kernels: they form the
// full Hamilton product of two quaternions in 64-bit integers,
//   (a*b)0 = a0 b0 - a1 b1 - a2 b2 - a3 b3
//   (a*b)1 = a0 b1 + a1 b0 + a2 b3 - a3 b2
//   (a*b)2 = a0 b2 - a1 b3 + a2 b0 + a3 b1
//   (a*b)3 = a0 b3 + a1 b2 - a2 b1 + a3 b0
// and build s = (alpha, beta, 0, 0), t = (gamma, 0, delta, 0) from the raw
// constants.  make_coef() derives the constant-memory word from alpha..delta.
package tb_qmul_pkg;
  import qmul_pkg::*;

  // four 64-bit components; arithmetic on them is modulo 2^64, which is exact here
  typedef logic [3:0][63:0] lq_t;

  function automatic void hamilton(input lq_t a, input lq_t b, output lq_t r);
    r[0] = a[0]*b[0] - a[1]*b[1] - a[2]*b[2] - a[3]*b[3];
    r[1] = a[0]*b[1] + a[1]*b[0] + a[2]*b[3] - a[3]*b[2];
    r[2] = a[0]*b[2] - a[1]*b[3] + a[2]*b[0] + a[3]*b[1];
    r[3] = a[0]*b[3] + a[1]*b[2] - a[2]*b[1] + a[3]*b[0];
  endfunction

  function automatic void to_lq(input quat_t q, output lq_t r);
    r[0] = longint'(q.q0);
    r[1] = longint'(q.q1);
    r[2] = longint'(q.q2);
    r[3] = longint'(q.q3);
  endfunction

  // expected s*q, q*t and s*q*t
  function automatic void ref_products(input quat_t q, input longint al, input longint be,
                                       input longint ga, input longint de,
                                       output lq_t sq, output lq_t qt, output lq_t sqt);
    lq_t x, s, t;
    to_lq(q, x);
    s[0] = al; s[1] = be; s[2] = 0;  s[3] = 0;
    t[0] = ga; t[1] = 0;  t[2] = de; t[3] = 0;
    hamilton(s, x, sq);
    hamilton(x, t, qt);
    hamilton(sq, t, sqt);
  endfunction

  // constant-memory word for (alpha, beta, gamma, delta)
  function automatic coef_set_t make_coef(input longint al, input longint be,
                                          input longint ga, input longint de);
    coef_set_t c;
    longint sv [3];
    longint tv [3];
    c.sq.alpha = c1_t'(al);
    c.sq.d1    = c1_t'(al + be);
    c.sq.d2    = c1_t'(al - be);
    c.qt.g1    = c1_t'(ga - de);
    c.qt.g2    = c1_t'(ga + de);
    c.qt.delta = c1_t'(de);
    sv[0] = al;      sv[1] = al + be; sv[2] = al - be;
    tv[0] = ga - de; tv[1] = ga + de; tv[2] = de;
    for (int k = 0; k < 3; k++)
      for (int j = 0; j < 3; j++)
        c.sqt[3*k+j] = C2_W'(tv[k] * sv[j]);
    return c;
  endfunction

  // a random signed constant, with the extreme values now and then
  function automatic longint rand_coef();
    int unsigned r = $urandom_range(0, 15);
    if (r == 0) return -(longint'(1) << (COEF_W-1));
    if (r == 1) return  (longint'(1) << (COEF_W-1)) - 1;
    return longint'($signed(COEF_W'($urandom)));
  endfunction

  function automatic data_t rand_data();
    int unsigned r = $urandom_range(0, 15);
    if (r == 0) return data_t'(-(longint'(1) << (DATA_W-1)));
    if (r == 1) return data_t'((longint'(1) << (DATA_W-1)) - 1);
    return data_t'($urandom);
  endfunction

  function automatic quat_t rand_quat();
    quat_t q;
    q.q0 = rand_data();
    q.q1 = rand_data();
    q.q2 = rand_data();
    q.q3 = rand_data();
    return q;
  endfunction

endpackage
