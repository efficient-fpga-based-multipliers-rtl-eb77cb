// tb_gf3_ref_pkg: reference arithmetic for the testbenches. Coefficients are
// plain integers 0..2 computed with % 3, so nothing here shares code with the
// bit-level formulas of the design. Helpers convert between integer vectors
// and the design's two-bit codes (0 = 00, 1 = 01, 2 = 10).
package tb_gf3_ref_pkg;
  import gf3_pkg::*;

  typedef int iv_t [M];                  // element of F_{3^97}
  typedef struct { iv_t re; iv_t im; } i2_t;   // element of F_{3^{2*97}}
  typedef i2_t i6_t [3];                 // element of F_{3^{6*97}}, word w = coefficient of r^w

  function automatic f3_t enc1(int v);
    case (((v % 3) + 3) % 3)
      0: return 2'b00;
      1: return 2'b01;
      default: return 2'b10;
    endcase
  endfunction

  function automatic int dec1(f3_t c);
    return (c == 2'b01) ? 1 : (c == 2'b10) ? 2 : 0;
  endfunction

  function automatic f397_t enc(iv_t v);
    f397_t r;
    for (int i = 0; i < M; i++) r[i] = enc1(v[i]);
    return r;
  endfunction

  function automatic iv_t dec(f397_t c);
    iv_t r;
    for (int i = 0; i < M; i++) r[i] = dec1(c[i]);
    return r;
  endfunction

  function automatic iv_t rnd();
    iv_t r;
    for (int i = 0; i < M; i++) r[i] = int'($urandom_range(0, 2));
    return r;
  endfunction

  function automatic iv_t zero();
    iv_t r;
    for (int i = 0; i < M; i++) r[i] = 0;
    return r;
  endfunction

  function automatic iv_t iadd(iv_t a, iv_t b);
    iv_t r;
    for (int i = 0; i < M; i++) r[i] = (a[i] + b[i]) % 3;
    return r;
  endfunction

  function automatic iv_t ineg(iv_t a);
    iv_t r;
    for (int i = 0; i < M; i++) r[i] = (3 - a[i]) % 3;
    return r;
  endfunction

  // reduce a polynomial of degree < 2M-1 modulo x^97 + x^16 + 2, top down:
  // x^d = x^(d-97) * (x^97) = x^(d-97) * (-x^16 - 2)
  function automatic iv_t ireduce(int t [2*M-1]);
    iv_t r;
    for (int d = 2 * M - 2; d >= M; d--) begin
      int h;
      h = t[d] % 3;
      t[d] = 0;
      t[d-M+F_TAP] = (t[d-M+F_TAP] + 2 * h) % 3;   // -h
      t[d-M]       = (t[d-M] + h) % 3;             // -2h = h
    end
    for (int i = 0; i < M; i++) r[i] = t[i] % 3;
    return r;
  endfunction

  function automatic iv_t imul(iv_t a, iv_t b);
    int t [2*M-1];
    for (int i = 0; i < 2 * M - 1; i++) t[i] = 0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < M; j++)
        t[i+j] = (t[i+j] + a[i] * b[j]) % 3;
    return ireduce(t);
  endfunction

  function automatic i2_t i2mul(i2_t a, i2_t b);
    i2_t r;
    r.re = iadd(imul(a.re, b.re), ineg(imul(a.im, b.im)));
    r.im = iadd(imul(a.re, b.im), imul(a.im, b.re));
    return r;
  endfunction

  function automatic i2_t i2add(i2_t a, i2_t b);
    i2_t r;
    r.re = iadd(a.re, b.re);
    r.im = iadd(a.im, b.im);
    return r;
  endfunction

  // schoolbook product over r, then r^3 = r + 1, r^4 = r^2 + r
  function automatic i6_t i6mul(i6_t a, i6_t b);
    i2_t c [5];
    i6_t r;
    for (int k = 0; k < 5; k++) begin
      c[k].re = zero();
      c[k].im = zero();
    end
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        c[i+j] = i2add(c[i+j], i2mul(a[i], b[j]));
    r[0] = i2add(c[0], c[3]);
    r[1] = i2add(i2add(c[1], c[3]), c[4]);
    r[2] = i2add(c[2], c[4]);
    return r;
  endfunction

  function automatic bit ieq(iv_t a, iv_t b);
    for (int i = 0; i < M; i++) if (a[i] != b[i]) return 1'b0;
    return 1'b1;
  endfunction
endpackage
