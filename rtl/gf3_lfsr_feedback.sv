// gf3_lfsr_feedback: feedback circuit and accumulator adders of the LFSR
// multiplier. One step of the digit-serial (most significant digit first)
// multiplication is
//   c_next = (c * x^D + ov) mod f(x),   f(x) = x^97 + x^16 + 2,
// where ov is the overlap-circuit output A(x)*b_digit(x). Shifting c by D
// digits and adding ov gives powers up to x^(96+D); each x^(97+k) is folded
// back with x^97 = 2*x^16 + 1, i.e. its coefficient h is added to x^k and -h
// to x^(16+k). Because 16 + D - 1 < 97 one fold is enough.
// The source paper describes the shift, the powers produced and that they are
// reduced modulo f(x) by this circuit; the single-fold adder array is this
// design's form of it. Purely combinational. Coefficients of ov above x^(96+D)
// are zero (they come from the zero padding of A) and are ignored.
module gf3_lfsr_feedback
  import gf3_pkg::*;
#(
  parameter int D  = 14,
  parameter int NW = (M + D - 1) / D
) (
  input  f397_t            c,
  input  f3_t [NW*D+D-2:0] ov,
  output f397_t            c_next
);
  localparam int TW = M + D;   // powers x^0 .. x^(96+D)
  localparam int OW = (NW * D + D - 1 < TW) ? NW * D + D - 1 : TW;

  initial assert (F_TAP + D - 1 < M) else $error("digit size too large for one fold");

  f3_t [TW-1:0] t;

  always_comb begin
    t = '0;
    for (int i = 0; i < M; i++) t[i+D] = c[i];
    for (int i = 0; i < OW; i++) t[i] = f3_add(t[i], ov[i]);
    for (int i = 0; i < M; i++) c_next[i] = t[i];
    for (int k = 0; k < D; k++) begin
      c_next[k]       = f3_add(c_next[k], t[M+k]);
      c_next[F_TAP+k] = f3_add(c_next[F_TAP+k], f3_neg(t[M+k]));
    end
  end
endmodule
