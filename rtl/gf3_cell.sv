// gf3_cell: one F3 arithmetic cell. It adds, multiplies and negates two
// elements of F3 given in the two-bit code (a1,a0) with 0 = 00, 1 = 01, 2 = 10.
// The formulas are the bit-level ones of the source paper (each maps to one
// FPGA LUT; negation is a bit swap) and live in gf3_pkg so that every wider
// datapath uses the same cells. Purely combinational; code 11 is not a valid
// input and gives no defined result.
module gf3_cell
  import gf3_pkg::*;
(
  input  f3_t a,
  input  f3_t b,
  output f3_t sum,    // a + b
  output f3_t prod,   // a * b
  output f3_t neg_a   // -a
);
  assign sum   = f3_add(a, b);
  assign prod  = f3_mul(a, b);
  assign neg_a = f3_neg(a);
endmodule
