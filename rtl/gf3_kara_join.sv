// gf3_kara_join: product side of one Karatsuba step. From the three half-size
// products lo = a0*b0, hi = a1*b1 and mid = (a0+a1)(b0+b1) it forms
//   p = hi*X^2 + (mid - lo - hi)*X + lo,   X = x^H,
// and keeps the 2N-1 coefficients that can be non-zero (the rest vanish
// because the high halves were zero-padded). Purely combinational.
module gf3_kara_join
  import gf3_pkg::*;
#(
  parameter int N = 14,
  parameter int H = (N + 1) / 2
) (
  input  f3_t [2*H-2:0] lo,
  input  f3_t [2*H-2:0] hi,
  input  f3_t [2*H-2:0] mid,
  output f3_t [2*N-2:0] p
);
  f3_t [4*H-2:0] acc;

  always_comb begin
    acc = '0;
    for (int i = 0; i < 2 * H - 1; i++) begin
      acc[i]     = f3_add(acc[i], lo[i]);
      acc[i+2*H] = f3_add(acc[i+2*H], hi[i]);
      acc[i+H]   = f3_add(acc[i+H], f3_add(mid[i], f3_neg(f3_add(lo[i], hi[i]))));
    end
    p = acc[2*N-2:0];
  end
endmodule
