// gf3_6m_input_stage: input stage of the F_{3^{6*97}} multiplier. Two equal
// halves, one per operand, each a scaler (gf3_2m_scaler) followed by an
// accumulator of F_{3^{2*97}} width, as drawn in the source paper. Over three
// cycles it reads the operand words A0, A1, A2 from memory and accumulates
//   X = A0 + p*A1 + p^2*A2        (p in {1, s, -1, -s};  X = A2 for p = inf)
// with `clr` on the first cycle restarting the sum. Both halves use the same
// coefficient. The F_{3^97} multiplier then takes the Karatsuba parts of X:
// its real part, imaginary part or their sum, as chosen by `opsel`; this
// part-select is this design's addition, needed because the accumulator
// holds an F_{3^{2*97}} value while the multiplier works in F_{3^97}.
// Timing: `en` accumulates on the clock edge; op_a/op_b are combinational
// from the accumulators and opsel.
module gf3_6m_input_stage
  import gf3_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  logic   clr,
  input  scal_e  coef,
  input  f3_2m_t word_a,
  input  f3_2m_t word_b,
  input  opsel_e opsel,
  output f397_t  op_a,
  output f397_t  op_b,
  output f3_2m_t acc_a,
  output f3_2m_t acc_b
);
  f3_2m_t sc_a, sc_b;

  gf3_2m_scaler u_sc_a (.x(word_a), .coef(coef), .y(sc_a));
  gf3_2m_scaler u_sc_b (.x(word_b), .coef(coef), .y(sc_b));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_a <= '0;
      acc_b <= '0;
    end else if (en) begin
      acc_a <= clr ? sc_a : f3_2m_add(acc_a, sc_a);
      acc_b <= clr ? sc_b : f3_2m_add(acc_b, sc_b);
    end
  end

  function automatic f397_t part(f3_2m_t v, opsel_e sel);
    unique case (sel)
      OP_RE:   return v.re;
      OP_IM:   return v.im;
      default: return f397_add(v.re, v.im);
    endcase
  endfunction

  assign op_a = part(acc_a, opsel);
  assign op_b = part(acc_b, opsel);
endmodule
