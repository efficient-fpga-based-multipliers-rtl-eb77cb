// gf3_pm_kara2: two nested Karatsuba steps over classical sub-multipliers,
// the method K K C_Q for polynomials of length N over F3 (H = ceil(N/2),
// Q = ceil(H/2)). With N = 14 this is the paper's K K C_4 (14 -> 7 -> 4),
// nine C_4 multipliers in all. Purely combinational; product of 2N-1
// coefficients, not reduced.
module gf3_pm_kara2
  import gf3_pkg::*;
#(
  parameter int N = 14
) (
  input  f3_t [N-1:0]   a,
  input  f3_t [N-1:0]   b,
  output f3_t [2*N-2:0] p
);
  localparam int H = (N + 1) / 2;
  f3_t [H-1:0]   a_lo, a_hi, a_sum, b_lo, b_hi, b_sum;
  f3_t [2*H-2:0] p_lo, p_hi, p_mid;

  gf3_kara_split #(.N(N), .H(H)) u_sa (.x(a), .lo(a_lo), .hi(a_hi), .sum(a_sum));
  gf3_kara_split #(.N(N), .H(H)) u_sb (.x(b), .lo(b_lo), .hi(b_hi), .sum(b_sum));
  gf3_pm_kara1 #(.N(H)) u_lo  (.a(a_lo),  .b(b_lo),  .p(p_lo));
  gf3_pm_kara1 #(.N(H)) u_hi  (.a(a_hi),  .b(b_hi),  .p(p_hi));
  gf3_pm_kara1 #(.N(H)) u_mid (.a(a_sum), .b(b_sum), .p(p_mid));
  gf3_kara_join #(.N(N), .H(H)) u_join (.lo(p_lo), .hi(p_hi), .mid(p_mid), .p(p));
endmodule
