// gf3_kara_split: operand side of one Karatsuba step. A polynomial of length
// N is split into a low half of H = ceil(N/2) coefficients and a high half of
// N-H coefficients, zero-padded to H when N is odd; the sum of the halves is
// formed for the middle product. Purely combinational.
module gf3_kara_split
  import gf3_pkg::*;
#(
  parameter int N = 14,
  parameter int H = (N + 1) / 2
) (
  input  f3_t [N-1:0] x,
  output f3_t [H-1:0] lo,
  output f3_t [H-1:0] hi,
  output f3_t [H-1:0] sum
);
  always_comb begin
    lo = x[H-1:0];
    hi = '0;
    for (int i = 0; i < N - H; i++) hi[i] = x[H+i];
    for (int i = 0; i < H; i++) sum[i] = f3_add(lo[i], hi[i]);
  end
endmodule
