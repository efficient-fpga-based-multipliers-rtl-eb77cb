// gf3_overlap: overlap circuit of the digit-level LFSR multiplier. Digit
// multiplier i returns the product of word A_i of register A with the current
// digit of B, a polynomial of 2D-1 coefficients that belongs at x^(i*D). The
// powers x^D..x^(2D-2) of product i therefore overlap powers x^0..x^(D-2) of
// product i+1; this circuit adds them and returns the whole polynomial
// A(x)*b_digit(x) with NW*D + D - 1 coefficients. Purely combinational.
// The source paper names this circuit and says what it adds; the adder array
// is the plain form of that.
module gf3_overlap
  import gf3_pkg::*;
#(
  parameter int D  = 14,
  parameter int NW = (M + D - 1) / D
) (
  input  f3_t [NW-1:0][2*D-2:0] prods,
  output f3_t [NW*D+D-2:0]      sum
);
  always_comb begin
    sum = '0;
    for (int i = 0; i < NW; i++)
      for (int j = 0; j < 2 * D - 1; j++)
        sum[i*D+j] = f3_add(sum[i*D+j], prods[i][j]);
  end
endmodule
