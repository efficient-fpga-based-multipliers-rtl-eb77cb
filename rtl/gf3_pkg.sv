// gf3_pkg: types, constants and arithmetic shared by the F_{3^97} and
// F_{3^{6*97}} multipliers.
//
// An element of F3 is a two-bit code (a1,a0): 0 = 00, 1 = 01, 2 = 10; the code
// 11 never occurs. Addition, multiplication and negation use the bit-level
// formulas of Granger, Page and Stam as restated in the source paper:
//   sum  = ((a0|b0)^t, (a1|b1)^t),   t = (a0|b1)^(a1|b0)
//   prod = ((a1&b0)|(a0&b1), (a0&b0)|(a1&b1))
//   neg  = (a0, a1)                   (a bit swap)
// F_{3^97} is F3[x]/(x^97 + x^16 + 2) in polynomial basis, bit vector index i
// holding the coefficient of x^i. F_{3^{2*97}} = F_{3^97}[s]/(s^2+1); an
// element is the pair (re, im) meaning re + im*s. F_{3^{6*97}} is built over it
// with r^3 = r + 1.
//
// The F_{3^{6*97}} schedule tables at the end encode the design's own
// evaluation scheme (points 1, s, -1, -s, infinity, each split by Karatsuba
// into three F_{3^97} products); they are computed by constant functions so
// that no hand-typed table can drift from the algebra.
package gf3_pkg;

  localparam int M     = 97;   // extension degree of F_{3^97}
  localparam int F_TAP = 16;   // middle term of f(x) = x^97 + x^16 + 2

  typedef logic [1:0] f3_t;
  typedef f3_t [M-1:0] f397_t;

  typedef struct packed {
    f397_t im;
    f397_t re;
  } f3_2m_t;

  // ---------------------------------------------------------------- F3
  function automatic f3_t f3_add(f3_t a, f3_t b);
    logic t;
    t = (a[0] | b[1]) ^ (a[1] | b[0]);
    return {(a[0] | b[0]) ^ t, (a[1] | b[1]) ^ t};
  endfunction

  function automatic f3_t f3_mul(f3_t a, f3_t b);
    return {(a[1] & b[0]) | (a[0] & b[1]), (a[0] & b[0]) | (a[1] & b[1])};
  endfunction

  function automatic f3_t f3_neg(f3_t a);
    return {a[0], a[1]};
  endfunction

  // ---------------------------------------------------------- F_{3^97}
  function automatic f397_t f397_add(f397_t a, f397_t b);
    f397_t r;
    for (int i = 0; i < M; i++) r[i] = f3_add(a[i], b[i]);
    return r;
  endfunction

  function automatic f397_t f397_neg(f397_t a);
    f397_t r;
    for (int i = 0; i < M; i++) r[i] = f3_neg(a[i]);
    return r;
  endfunction

  // ------------------------------------------------------ F_{3^{2*97}}
  function automatic f3_2m_t f3_2m_add(f3_2m_t a, f3_2m_t b);
    return '{im: f397_add(a.im, b.im), re: f397_add(a.re, b.re)};
  endfunction

  // s*(re + im*s) = -im + re*s : a permutation of bits
  function automatic f3_2m_t f3_2m_mul_s(f3_2m_t a);
    return '{im: a.re, re: f397_neg(a.im)};
  endfunction

  function automatic f3_2m_t f3_2m_neg(f3_2m_t a);
    return '{im: f397_neg(a.im), re: f397_neg(a.re)};
  endfunction

  // Scalars of F9 = F3[s]/(s^2+1) that the scaler of the input and output
  // stages can apply: 0, +-1, +-s and the sums +-1 +- s.
  typedef enum logic [3:0] {
    SC_ZERO = 4'd0,
    SC_P1   = 4'd1,   //  1
    SC_M1   = 4'd2,   // -1
    SC_PS   = 4'd3,   //  s
    SC_MS   = 4'd4,   // -s
    SC_P1PS = 4'd5,   //  1 + s
    SC_P1MS = 4'd6,   //  1 - s
    SC_M1PS = 4'd7,   // -1 + s
    SC_M1MS = 4'd8    // -1 - s
  } scal_e;

  // Which F_{3^97} part of an F_{3^{2*97}} value x = x0 + x1*s is fed to the
  // multiplier: Karatsuba needs x0, x0 + x1 and x1.
  typedef enum logic [1:0] {
    OP_RE  = 2'd0,
    OP_SUM = 2'd1,
    OP_IM  = 2'd2
  } opsel_e;

  // --------------------------------------- F_{3^{6*97}} schedule tables
  localparam int NPTS  = 5;           // evaluation points 1, s, -1, -s, inf
  localparam int NPROD = 3 * NPTS;    // 15 F_{3^97} multiplications
  localparam int NWORD = 3;           // F_{3^{2*97}} words per F_{3^{6*97}} element

  // F9 element as a pair of integers mod 3: v = re + im*s
  typedef struct packed { logic [1:0] re; logic [1:0] im; } f9_t;

  function automatic f9_t f9(int re, int im);
    f9_t v;
    v.re = 2'(((re % 3) + 3) % 3);
    v.im = 2'(((im % 3) + 3) % 3);
    return v;
  endfunction

  function automatic f9_t f9_mul(f9_t a, f9_t b);
    return f9(int'(a.re) * int'(b.re) - int'(a.im) * int'(b.im),
              int'(a.re) * int'(b.im) + int'(a.im) * int'(b.re));
  endfunction

  function automatic scal_e f9_to_scal(f9_t v);
    case ({v.re, v.im})
      {2'd0, 2'd0}: return SC_ZERO;
      {2'd1, 2'd0}: return SC_P1;
      {2'd2, 2'd0}: return SC_M1;
      {2'd0, 2'd1}: return SC_PS;
      {2'd0, 2'd2}: return SC_MS;
      {2'd1, 2'd1}: return SC_P1PS;
      {2'd1, 2'd2}: return SC_P1MS;
      {2'd2, 2'd1}: return SC_M1PS;
      default:      return SC_M1MS;
    endcase
  endfunction

  // Evaluation point number pt (0..3 = 1, s, -1, -s; 4 = infinity).
  function automatic f9_t point_val(int pt);
    case (pt)
      0:       return f9(1, 0);
      1:       return f9(0, 1);
      2:       return f9(-1, 0);
      default: return f9(0, -1);
    endcase
  endfunction

  // Input stage: X_pt = A0 + pt*A1 + pt^2*A2 (X_inf = A2); coefficient of
  // operand word w (0..2) for point pt.
  function automatic scal_e in_coef(int pt, int w);
    f9_t p;
    if (pt == NPTS - 1) return (w == 2) ? SC_P1 : SC_ZERO;
    p = point_val(pt);
    case (w)
      0:       return SC_P1;
      1:       return f9_to_scal(p);
      default: return f9_to_scal(f9_mul(p, p));
    endcase
  endfunction

  // Product k = 3*pt + t uses Karatsuba part t: 0 = x0*y0, 1 = (x0+x1)(y0+y1),
  // 2 = x1*y1.
  function automatic opsel_e prod_opsel(int k);
    case (k % 3)
      0:       return OP_RE;
      1:       return OP_SUM;
      default: return OP_IM;
    endcase
  endfunction

  // Output stage: coefficient with which product k is added to result word
  // w (0..2, the coefficient of r^w).
  //   E_pt = x0y0 (1 - s) + (x0+x1)(y0+y1) s + x1y1 (-1 - s)
  //   C0 = -E_1 + (1+s) E_s + (1-s) E_-s - E_inf
  //   C1 = -E_1 + E_-1 + E_inf
  //   C2 =  E_1 - E_s + E_-1 - E_-s + E_inf
  // (from the 5-point formulas reduced modulo r^3 - r - 1).
  function automatic scal_e out_coef(int k, int w);
    f9_t part, wt;
    int pt;
    pt = k / 3;
    case (k % 3)
      0:       part = f9(1, -1);
      1:       part = f9(0, 1);
      default: part = f9(-1, -1);
    endcase
    case (w)
      0: case (pt)
           0: wt = f9(-1, 0);
           1: wt = f9(1, 1);
           2: wt = f9(0, 0);
           3: wt = f9(1, -1);
           default: wt = f9(-1, 0);
         endcase
      1: case (pt)
           0: wt = f9(-1, 0);
           1: wt = f9(0, 0);
           2: wt = f9(1, 0);
           3: wt = f9(0, 0);
           default: wt = f9(1, 0);
         endcase
      default: case (pt)
           0: wt = f9(1, 0);
           1: wt = f9(-1, 0);
           2: wt = f9(1, 0);
           3: wt = f9(-1, 0);
           default: wt = f9(1, 0);
         endcase
    endcase
    return f9_to_scal(f9_mul(wt, part));
  endfunction

endpackage
