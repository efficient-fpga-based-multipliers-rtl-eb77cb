// gf3_poly_mult: digit multiplier (block "M" of the LFSR multiplier). It forms
// the full product of two polynomials over F3 of length N (degree N-1); the
// product has 2N-1 coefficients and is not reduced.
//
// Following the source paper, the digit multiplier is a recursive
// combination of Karatsuba steps K,
//   a*b = a1b1 X^2 + ((a0+a1)(b0+b1) - a0b0 - a1b1) X + a0b0,
// and a classical base case C. LEVELS selects how many Karatsuba steps are
// stacked on top of the classical multiplier; the paper's table maps as
//   D = 1, 2, 4 : LEVELS = 0   (C_1, C_2, C_4)
//   D = 7       : LEVELS = 1   (K C_4)
//   D = 14      : LEVELS = 2   (K K C_4)
// Odd halves are zero-padded, and synthesis removes the gates fed by the
// known zeros, as the paper does by hand. Purely combinational.
module gf3_poly_mult
  import gf3_pkg::*;
#(
  parameter int N      = 14,
  parameter int LEVELS = 2
) (
  input  f3_t [N-1:0]   a,
  input  f3_t [N-1:0]   b,
  output f3_t [2*N-2:0] p
);
  if (LEVELS == 0 || N < 2) begin : g_c
    gf3_pm_classic #(.N(N)) u_mul (.a(a), .b(b), .p(p));
  end else if (LEVELS == 1 || N < 4) begin : g_kc
    gf3_pm_kara1 #(.N(N)) u_mul (.a(a), .b(b), .p(p));
  end else begin : g_kkc
    gf3_pm_kara2 #(.N(N)) u_mul (.a(a), .b(b), .p(p));
  end

  initial assert (LEVELS >= 0 && LEVELS <= 2)
    else $error("gf3_poly_mult: LEVELS must be 0, 1 or 2");
endmodule
