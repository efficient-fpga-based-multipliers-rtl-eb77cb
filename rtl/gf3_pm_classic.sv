// gf3_pm_classic: classical (schoolbook) multiplier C_N for polynomials over
// F3 of length N; the product has 2N-1 coefficients and is not reduced.
// The N^2 coefficient products come from an array of gf3_cell F3 cells; the
// adders then sum them by power of x. Purely combinational. Base case of the
// digit multiplier gf3_poly_mult. Only the product output of each cell is
// used; its sum and negation outputs are left open on purpose.
module gf3_pm_classic
  import gf3_pkg::*;
#(
  parameter int N = 4
) (
  input  f3_t [N-1:0]   a,
  input  f3_t [N-1:0]   b,
  output f3_t [2*N-2:0] p
);
  f3_t [N-1:0][N-1:0] pp;

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      gf3_cell u_cell (.a(a[i]), .b(b[j]), .sum(), .prod(pp[i][j]), .neg_a());
    end
  end

  always_comb begin
    p = '0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        p[i+j] = f3_add(p[i+j], pp[i][j]);
  end
endmodule
